// rd_control_unit: the Register Dispersion control unit of the decode (ID) stage.
//
// It keeps the architectural vector registers v1..v31 cached in a cVRF of NPHYS
// physical slots (v0 lives in its own register and is never looked up here). The
// slots are used as a circular FIFO: head points at the register resident the
// longest, tail at the next free slot, count says how many are occupied.
//
// For the instruction waiting in ID, the tag array is searched for vs1, vs2 and vd
// at once. If every operand the instruction uses hits, the instruction goes to
// ID/EX in that cycle together with the three slot indexes (no stall). Otherwise
// the unit stalls decode and handles the first missing operand, in the order vs1,
// vs2, vd, with one micro-op per cycle placed into ID/EX instead of the instruction:
//   - a free slot exists : FILL micro-op, load the register from its reserved memory
//                          address into the tail slot; the tag is written at once.
//   - the cVRF is full   : SPILL micro-op of the head slot (FIFO replacement), store
//                          it to the address of the register named by its tag, and
//                          free the slot; the fill follows in a later cycle.
// Because the lookups are repeated every cycle, an operand that a later eviction
// pushed out again is simply fetched again, so an instruction only leaves ID when
// all its operands are resident together. With NPHYS >= 3 this settles within two
// rounds. That repeat is this design's answer to a case the paper does not discuss;
// the FIFO pointers, the eviction of the head, the stores before loads and the
// operand order follow the paper. Micro-ops and instructions share ID/EX, so the
// EX stage sees them in program order and needs no further interlock.
//
// Interface: dec_valid/use/areg describe the instruction in ID; ex_ready says ID/EX
// accepts an entry this cycle. issue pulses when the instruction leaves with
// tag[0..2]; uop_valid pulses with a micro-op (kind, slot, register).
module rd_control_unit
  import rd_pkg::*;
#(
  parameter int unsigned NPHYS = 8,
  localparam int unsigned K    = (NPHYS > 1) ? $clog2(NPHYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction in ID
  input  logic              dec_valid,
  input  logic              use_op  [3],   // 0 = vs1, 1 = vs2, 2 = vd
  input  logic [AREG_W-1:0] areg    [3],
  // ID/EX can take an entry
  input  logic              ex_ready,
  // instruction leaves ID
  output logic              issue,
  output logic [K-1:0]      tag     [3],
  output logic              stall,
  // dispersion micro-op into ID/EX
  output logic              uop_valid,
  output ex_kind_e          uop_kind,
  output logic [K-1:0]      uop_pidx,
  output logic [AREG_W-1:0] uop_areg,
  // occupancy, for observation
  output logic [K:0]        occupancy
);

  logic [K-1:0] head_q, tail_q;
  logic [K:0]   count_q;

  logic              lk_hit [3];
  logic [K-1:0]      lk_idx [3];
  logic              rd_valid;
  logic [AREG_W-1:0] rd_areg;

  logic need [3];
  logic miss [3];
  logic any_miss;
  logic [1:0] first_miss;
  logic full;
  logic do_fill, do_spill;

  cvrf_tag_array #(.NPHYS(NPHYS)) u_tags (
    .clk      (clk),
    .rst_n    (rst_n),
    .lk_areg  (areg),
    .lk_hit   (lk_hit),
    .lk_idx   (lk_idx),
    .set_en   (do_fill),
    .set_idx  (tail_q),
    .set_areg (areg[first_miss]),
    .clr_en   (do_spill),
    .clr_idx  (head_q),
    .rd_idx   (head_q),
    .rd_valid (rd_valid),
    .rd_areg  (rd_areg)
  );

  function automatic logic [K-1:0] ptr_inc(logic [K-1:0] p);
    return (32'(p) == NPHYS - 1) ? '0 : p + K'(1);
  endfunction

  always_comb begin
    any_miss   = 1'b0;
    first_miss = 2'd0;
    for (int p = 2; p >= 0; p--) begin
      need[p] = use_op[p] && (areg[p] != '0);
      miss[p] = need[p] && !lk_hit[p];
      if (miss[p]) begin
        any_miss   = 1'b1;
        first_miss = 2'(p);
      end
      tag[p] = lk_idx[p];
    end
    full     = (32'(count_q) == NPHYS);
    issue    = dec_valid && !any_miss && ex_ready;
    stall    = dec_valid && !issue;
    do_fill  = dec_valid && any_miss && ex_ready && !full;
    do_spill = dec_valid && any_miss && ex_ready && full;
    uop_valid = do_fill || do_spill;
    uop_kind  = do_spill ? EX_SPILL : EX_FILL;
    uop_pidx  = do_spill ? head_q : tail_q;
    uop_areg  = do_spill ? rd_areg : areg[first_miss];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else if (do_fill) begin
      tail_q  <= ptr_inc(tail_q);
      count_q <= count_q + 1'b1;
    end else if (do_spill) begin
      head_q  <= ptr_inc(head_q);
      count_q <= count_q - 1'b1;
    end
  end

  assign occupancy = count_q;

  // The evictee at the head of a full FIFO always carries a tag.
  a_spill_valid: assert property (@(posedge clk) disable iff (!rst_n) do_spill |-> rd_valid)
    else $error("spill of an empty slot");

  initial assert (NPHYS >= 3) else $error("NPHYS must be at least 3 (three operands)");

endmodule
