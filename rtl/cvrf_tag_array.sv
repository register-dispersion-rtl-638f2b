// cvrf_tag_array: the tag half of the compact vector register file (cVRF).
//
// The cVRF is a fully associative cache of architectural vector registers. This
// block sits in the decode (ID) stage and holds, for each of the NPHYS physical
// slots, a valid bit and the architectural register number mapped to the slot; a
// slot with no valid tag is free. Following the paper, each of the three operands
// of an instruction (vs1, vs2, vd) looks up the array independently: three
// comparator banks compare the requested register number against every valid
// tag and return hit and the matching slot index (k = clog2(NPHYS) bits).
//
// Interface and timing:
//   lookup ports  - combinational, hit/idx valid in the same cycle as areg.
//   set port      - set_en writes {valid=1, set_areg} into slot set_idx at the clock edge.
//   clear port    - clr_en invalidates slot clr_idx at the clock edge (eviction).
//   read port     - rd_idx -> rd_valid/rd_areg, combinational (evictee's register number).
// All slots are invalid after reset. A register is never mapped twice: the
// controller only sets a slot for a register that missed. The tag width, the
// reset behaviour and the port set are this design's choices.
module cvrf_tag_array
  import rd_pkg::*;
#(
  parameter int unsigned NPHYS = 8,
  localparam int unsigned K    = (NPHYS > 1) ? $clog2(NPHYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // three independent lookups: 0 = vs1, 1 = vs2, 2 = vd
  input  logic [AREG_W-1:0] lk_areg [3],
  output logic              lk_hit  [3],
  output logic [K-1:0]      lk_idx  [3],
  // allocate a slot
  input  logic              set_en,
  input  logic [K-1:0]      set_idx,
  input  logic [AREG_W-1:0] set_areg,
  // free a slot
  input  logic              clr_en,
  input  logic [K-1:0]      clr_idx,
  // read the tag of one slot
  input  logic [K-1:0]      rd_idx,
  output logic              rd_valid,
  output logic [AREG_W-1:0] rd_areg
);

  logic              valid_q [NPHYS];
  logic [AREG_W-1:0] tag_q   [NPHYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPHYS; i++) begin
        valid_q[i] <= 1'b0;
        tag_q[i]   <= '0;
      end
    end else begin
      if (clr_en) valid_q[clr_idx] <= 1'b0;
      if (set_en) begin
        valid_q[set_idx] <= 1'b1;
        tag_q[set_idx]   <= set_areg;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      lk_hit[p] = 1'b0;
      lk_idx[p] = '0;
      for (int i = 0; i < NPHYS; i++) begin
        if (valid_q[i] && tag_q[i] == lk_areg[p]) begin
          lk_hit[p] = 1'b1;
          lk_idx[p] = K'(i);
        end
      end
    end
  end

  assign rd_valid = (32'(rd_idx) < NPHYS) ? valid_q[rd_idx] : 1'b0;
  assign rd_areg  = (32'(rd_idx) < NPHYS) ? tag_q[rd_idx]   : '0;

  // A register number may be mapped to at most one slot.
  for (genvar i = 0; i < NPHYS; i++) begin : g_chk_i
    for (genvar j = i + 1; j < NPHYS; j++) begin : g_chk_j
      a_unique_map: assert property (@(posedge clk) disable iff (!rst_n)
        !(valid_q[i] && valid_q[j] && tag_q[i] == tag_q[j]))
        else $error("tag array: register v%0d mapped twice", tag_q[i]);
    end
  end

endmodule
