// vector_ldst_unit: vector load/store unit of the EX stage.
//
// It owns the vector side of the data-memory port, which the paper shares with the
// scalar load/store path (the arbitration lives in the scalar core). Because a
// vector register is exactly one 32-byte cache line, every access here is a single
// line-wide transfer, as the paper requires. Four kinds of entries arrive from ID/EX:
//   EX_VLOAD  program unit-stride load from the scalar address; the loaded elements
//             are merged into the old vd (mask- and tail-undisturbed).
//   EX_VSTORE program unit-stride store of vd; byte enables cover active elements.
//   EX_SPILL  dispersion store of an evicted register to its reserved address.
//   EX_FILL   dispersion load of a missing register from its reserved address.
// Each of v1..v31 owns one line of a fixed region: VREG_BASE + (v - 1) * 32.
// The paper fixes that such a region exists; its placement (the last 992 bytes
// of the 2 MB memory) and the port handshake are this design's choices.
//
// Memory port handshake (one request outstanding): mem_req with address, write
// flag, byte enables and data is held until mem_gnt. A write is finished at the
// grant; a read finishes when mem_rvalid returns mem_rdata, at least one cycle
// after the grant. done pulses in the cycle an entry finishes; for loads and fills
// wr_en/wr_data in that cycle carry the value for the destination register.
// op_valid must stay high, with the same inputs, until done.
module vector_ldst_unit
  import rd_pkg::*;
#(
  parameter logic [31:0] VREG_BASE = 32'h001F_FC00
) (
  input  logic             clk,
  input  logic             rst_n,
  // entry from ID/EX
  input  logic             op_valid,
  input  ex_kind_e         kind,
  input  logic [AREG_W-1:0] areg,     // register of a spill or fill
  input  logic [31:0]      addr,      // scalar base address of a program access
  input  sew_e             eew,
  input  logic [VL_W-1:0]  vl,
  input  logic             vm,
  input  vreg_t            v0,
  input  vreg_t            vd_data,   // store data, and old value for load merging
  output logic             done,
  output logic             wr_en,
  output vreg_t            wr_data,
  // data memory port
  output logic             mem_req,
  output logic             mem_we,
  output logic [31:0]      mem_addr,
  output logic [VLENB-1:0] mem_be,
  output vreg_t            mem_wdata,
  input  logic             mem_gnt,
  input  logic             mem_rvalid,
  input  vreg_t            mem_rdata
);

  typedef enum logic {ST_IDLE, ST_WAIT} state_e;
  state_e state_q;

  logic             is_mem, is_write, is_prog;
  logic [VLENB-1:0] be;

  always_comb begin
    is_mem   = (kind == EX_VLOAD) || (kind == EX_VSTORE) || (kind == EX_SPILL) || (kind == EX_FILL);
    is_write = (kind == EX_VSTORE) || (kind == EX_SPILL);
    is_prog  = (kind == EX_VLOAD) || (kind == EX_VSTORE);
    be       = is_prog ? active_bytes(eew, vl, vm, v0) : '1;

    mem_req   = op_valid && is_mem && (state_q == ST_IDLE);
    mem_we    = is_write;
    mem_addr  = is_prog ? addr : VREG_BASE + 32'(areg - AREG_W'(1)) * VLENB;
    mem_be    = be;
    mem_wdata = vd_data;

    done  = 1'b0;
    wr_en = 1'b0;
    if (mem_req && mem_gnt && is_write) done = 1'b1;
    if (state_q == ST_WAIT && mem_rvalid) begin
      done  = 1'b1;
      wr_en = 1'b1;
    end
    for (int unsigned b = 0; b < VLENB; b++)
      wr_data[8*b +: 8] = be[b] ? mem_rdata[8*b +: 8] : vd_data[8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= ST_IDLE;
    else unique case (state_q)
      ST_IDLE: if (mem_req && mem_gnt && !is_write) state_q <= ST_WAIT;
      ST_WAIT: if (mem_rvalid) state_q <= ST_IDLE;
      default: state_q <= ST_IDLE;
    endcase
  end

  // Port rules: a whole-line access is line aligned; a spill or fill names v1..v31;
  // read data only comes back while a read is outstanding.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req |-> mem_addr[$clog2(VLENB)-1:0] == '0)
    else $error("vector access not line aligned: %h", mem_addr);
  a_no_v0: assert property (@(posedge clk) disable iff (!rst_n)
    (op_valid && (kind == EX_SPILL || kind == EX_FILL)) |-> areg != '0)
    else $error("v0 is never dispersed");
  a_rvalid: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid |-> state_q == ST_WAIT)
    else $error("read data without an outstanding read");

endmodule
