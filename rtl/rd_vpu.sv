// rd_vpu: integrated RISC-V vector unit with Register Dispersion.
//
// The unit keeps only NPHYS (default 8) of the 31 dispersable architectural vector
// registers in a compact register file (cVRF); the others live in a reserved
// region of data memory and are brought in on demand, like lines of a fully
// associative cache with FIFO replacement. v0, the mask register, has a dedicated
// register and never leaves the unit. The cVRF is split across two stages:
//
//   ID : vector_decoder -> rd_control_unit (with the cvrf_tag_array). Looks up
//        vs1, vs2 and vd; on a hit the instruction moves to ID/EX with three slot
//        indexes, on a miss decode stalls while spill/fill micro-ops go to ID/EX.
//   ID/EX register: one entry, an instruction or a micro-op, in program order.
//   EX : cvrf data registers and v0_mask_reg read by the slot indexes; vector_alu
//        finishes arithmetic in one cycle; vector_ldst_unit performs program
//        loads/stores and spills/fills over the data-memory port (multi-cycle);
//        vsetvli/vsetivli update vl and SEW here.
//
// The stage split, the tag and data arrays, the FIFO policy, the dedicated v0 and
// the memory-resident registers follow the paper. The instruction subset, the
// single-entry ID/EX with back-pressure, the memory-port handshake, the reset values
// (vl = 0, SEW = 32) and the performance counters are this design's choices.
//
// Interface
//   in_valid/in_instr/in_rs1 : vector instruction from the scalar core's decode
//                               stage with the value of its scalar rs1; held until
//                               in_ready. Non-vector or unsupported words are
//                               accepted and flagged on in_illegal.
//   xwb_valid/xwb_data       : new vl for the scalar rd of vsetvli/vsetivli.
//   mem_*                    : vector side of the shared data-memory port
//                              (see vector_ldst_unit).
//   cnt_*                    : operand look-ups, fills (misses), spills (evictions)
//                              and decode stall cycles since reset.
// Timing: an instruction whose operands hit leaves ID in the cycle it arrives if
// ID/EX is free; arithmetic takes one EX cycle; each spill or fill costs one
// memory transfer.
module rd_vpu
  import rd_pkg::*;
#(
  parameter int unsigned NPHYS     = 8,
  parameter logic [31:0] VREG_BASE = 32'h001F_FC00,
  localparam int unsigned K        = (NPHYS > 1) ? $clog2(NPHYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // instruction hand-off from the scalar core
  input  logic             in_valid,
  input  logic [31:0]      in_instr,
  input  logic [31:0]      in_rs1,
  output logic             in_ready,
  output logic             in_illegal,
  // scalar write-back of vsetvli
  output logic             xwb_valid,
  output logic [31:0]      xwb_data,
  // data-memory port
  output logic             mem_req,
  output logic             mem_we,
  output logic [31:0]      mem_addr,
  output logic [VLENB-1:0] mem_be,
  output vreg_t            mem_wdata,
  input  logic             mem_gnt,
  input  logic             mem_rvalid,
  input  vreg_t            mem_rdata,
  // vector state and counters
  output logic [VL_W-1:0]  vl,
  output sew_e             sew,
  output logic [31:0]      cnt_lookups,
  output logic [31:0]      cnt_fills,
  output logic [31:0]      cnt_spills,
  output logic [31:0]      cnt_stall_cycles,
  output logic [K:0]       occupancy          // occupied cVRF slots
);

  // ---------------------------------------------------------------- ID stage
  typedef struct packed {
    logic              valid;
    ex_kind_e          kind;
    alu_op_e           op;
    logic              madd;
    src_e              src;
    logic              vm;
    logic [4:0]        imm;
    sew_e              eew;
    sew_e              vset_sew;
    logic              vset_imm;
    logic              avl_x0;
    logic [AREG_W-1:0] vs1;
    logic [AREG_W-1:0] vs2;
    logic [AREG_W-1:0] vd;      // also the register of a spill or fill
    logic [K-1:0]      t_vs1;
    logic [K-1:0]      t_vs2;
    logic [K-1:0]      t_vd;    // also the slot of a spill or fill
    logic [31:0]       scalar;
  } idex_t;

  vdec_t             dec;
  logic              use_op [3];
  logic [AREG_W-1:0] areg   [3];
  logic              issue, stall;
  logic [K-1:0]      tag    [3];
  logic              uop_valid;
  ex_kind_e          uop_kind;
  logic [K-1:0]      uop_pidx;
  logic [AREG_W-1:0] uop_areg;
  logic              ex_ready;

  vector_decoder u_dec (.instr(in_instr), .dec(dec));

  assign use_op[0] = dec.use_vs1;
  assign use_op[1] = dec.use_vs2;
  assign use_op[2] = dec.use_vd;
  assign areg[0]   = dec.vs1;
  assign areg[1]   = dec.vs2;
  assign areg[2]   = dec.vd;

  rd_control_unit #(.NPHYS(NPHYS)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .dec_valid (in_valid && dec.valid),
    .use_op    (use_op),
    .areg      (areg),
    .ex_ready  (ex_ready),
    .issue     (issue),
    .tag       (tag),
    .stall     (stall),
    .uop_valid (uop_valid),
    .uop_kind  (uop_kind),
    .uop_pidx  (uop_pidx),
    .uop_areg  (uop_areg),
    .occupancy (occupancy)
  );

  assign in_illegal = in_valid && !dec.valid;
  assign in_ready   = issue || in_illegal;

  // ---------------------------------------------------------------- ID/EX
  idex_t idex_q, idex_d;
  logic  ex_done;

  assign ex_ready = !idex_q.valid || ex_done;

  always_comb begin
    idex_d = idex_q;
    if (ex_ready) idex_d.valid = 1'b0;
    if (issue) begin
      idex_d          = '0;
      idex_d.valid    = 1'b1;
      idex_d.kind     = dec.kind;
      idex_d.op       = dec.op;
      idex_d.madd     = dec.madd;
      idex_d.src      = dec.src;
      idex_d.vm       = dec.vm;
      idex_d.imm      = dec.imm;
      idex_d.eew      = dec.eew;
      idex_d.vset_sew = dec.vset_sew;
      idex_d.vset_imm = dec.vset_imm;
      idex_d.avl_x0   = dec.avl_x0;
      idex_d.vs1      = dec.vs1;
      idex_d.vs2      = dec.vs2;
      idex_d.vd       = dec.vd;
      idex_d.t_vs1    = tag[0];
      idex_d.t_vs2    = tag[1];
      idex_d.t_vd     = tag[2];
      idex_d.scalar   = in_rs1;
    end else if (uop_valid) begin
      idex_d       = '0;
      idex_d.valid = 1'b1;
      idex_d.kind  = uop_kind;
      idex_d.vd    = uop_areg;
      idex_d.t_vd  = uop_pidx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) idex_q <= '0;
    else        idex_q <= idex_d;
  end

  // ---------------------------------------------------------------- EX stage
  logic [K-1:0] rd_idx  [3];
  vreg_t        rd_data [3];
  vreg_t        v0;
  logic [VLENB-1:0] v0_bits;
  vreg_t        op_vs1, op_vs2, op_vd;
  logic         cvrf_we, v0_we;
  vreg_t        wdata;
  sew_e         sew_q;
  logic [VL_W-1:0] vl_q;
  logic         is_arith, is_mem, is_vset, is_uop;
  vreg_t        alu_res;
  logic [VLENB-1:0] alu_be;
  logic         ls_done, ls_wr_en;
  vreg_t        ls_wr_data;
  logic [31:0]  avl;
  logic [VL_W-1:0] new_vl;

  assign rd_idx[0] = idex_q.t_vs1;
  assign rd_idx[1] = idex_q.t_vs2;
  assign rd_idx[2] = idex_q.t_vd;

  cvrf #(.NPHYS(NPHYS)) u_cvrf (
    .clk     (clk),
    .rst_n   (rst_n),
    .rd_idx  (rd_idx),
    .rd_data (rd_data),
    .wr_en   (cvrf_we),
    .wr_idx  (idex_q.t_vd),
    .wr_data (wdata)
  );

  v0_mask_reg u_v0 (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (v0_we),
    .wr_be   ('1),
    .wr_data (wdata),
    .v0      (v0),
    .mask    (v0_bits)
  );

  assign is_uop   = (idex_q.kind == EX_SPILL) || (idex_q.kind == EX_FILL);
  assign is_arith = idex_q.kind == EX_ARITH;
  assign is_vset  = idex_q.kind == EX_VSET;
  assign is_mem   = !is_arith && !is_vset;

  // Architectural v0 is read from its own register, never from the cVRF.
  assign op_vs1 = (idex_q.vs1 == '0) ? v0 : rd_data[0];
  assign op_vs2 = (idex_q.vs2 == '0) ? v0 : rd_data[1];
  assign op_vd  = (!is_uop && idex_q.vd == '0) ? v0 : rd_data[2];

  vector_alu u_alu (
    .op     (idex_q.op),
    .madd   (idex_q.madd),
    .src    (idex_q.src),
    .sew    (sew_q),
    .vl     (vl_q),
    .vm     (idex_q.vm),
    .v0     (v0),
    .vs1    (op_vs1),
    .vs2    (op_vs2),
    .vd_old (op_vd),
    .scalar (idex_q.scalar),
    .imm    (idex_q.imm),
    .result (alu_res),
    .wr_be  (alu_be)
  );

  vector_ldst_unit #(.VREG_BASE(VREG_BASE)) u_ldst (
    .clk        (clk),
    .rst_n      (rst_n),
    .op_valid   (idex_q.valid && is_mem),
    .kind       (idex_q.kind),
    .areg       (idex_q.vd),
    .addr       (idex_q.scalar),
    .eew        (idex_q.eew),
    .vl         (vl_q),
    .vm         (idex_q.vm),
    .v0         (v0),
    .vd_data    (op_vd),
    .done       (ls_done),
    .wr_en      (ls_wr_en),
    .wr_data    (ls_wr_data),
    .mem_req    (mem_req),
    .mem_we     (mem_we),
    .mem_addr   (mem_addr),
    .mem_be     (mem_be),
    .mem_wdata  (mem_wdata),
    .mem_gnt    (mem_gnt),
    .mem_rvalid (mem_rvalid),
    .mem_rdata  (mem_rdata)
  );

  always_comb begin
    ex_done = idex_q.valid && (is_arith || is_vset || ls_done);
    wdata   = is_arith ? alu_res : ls_wr_data;
    cvrf_we = 1'b0;
    v0_we   = 1'b0;
    if (idex_q.valid) begin
      if (is_arith || (idex_q.kind == EX_VLOAD && ls_wr_en)) begin
        if (idex_q.vd == '0) v0_we   = 1'b1;
        else                 cvrf_we = 1'b1;
      end
      if (idex_q.kind == EX_FILL && ls_wr_en) cvrf_we = 1'b1;
    end

    avl    = idex_q.vset_imm ? {27'd0, idex_q.imm} :
             idex_q.avl_x0   ? 32'(vlmax(idex_q.vset_sew)) : idex_q.scalar;
    new_vl = (avl > 32'(vlmax(idex_q.vset_sew))) ? vlmax(idex_q.vset_sew) : VL_W'(avl);
    xwb_valid = idex_q.valid && is_vset;
    xwb_data  = 32'(new_vl);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sew_q <= SEW32;
      vl_q  <= '0;
    end else if (idex_q.valid && is_vset) begin
      sew_q <= idex_q.vset_sew;
      vl_q  <= new_vl;
    end
  end

  assign vl  = vl_q;
  assign sew = sew_q;

  // ---------------------------------------------------------------- counters
  logic [1:0] n_lookups;
  always_comb begin
    n_lookups = '0;
    for (int p = 0; p < 3; p++)
      if (use_op[p] && areg[p] != '0) n_lookups = n_lookups + 2'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_lookups      <= '0;
      cnt_fills        <= '0;
      cnt_spills       <= '0;
      cnt_stall_cycles <= '0;
    end else begin
      if (issue)                             cnt_lookups      <= cnt_lookups + 32'(n_lookups);
      if (uop_valid && uop_kind == EX_FILL)  cnt_fills        <= cnt_fills + 1;
      if (uop_valid && uop_kind == EX_SPILL) cnt_spills       <= cnt_spills + 1;
      if (stall)                             cnt_stall_cycles <= cnt_stall_cycles + 1;
    end
  end

  // The scalar core must hold an instruction until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_instr)))
    else $error("instruction withdrawn or changed while stalled");

endmodule
