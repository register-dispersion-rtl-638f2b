// v0_mask_reg: dedicated register for architectural vector register v0.
//
// v0 holds the mask of masked vector instructions, so it is read by almost every
// masked operation. As in the paper, it is kept in its own register next to the
// execution units and is never cached in, or evicted from, the cVRF. Writes use
// per-byte enables so that a masked or vl-limited write to v0 keeps the bytes it
// does not update; the byte-enable write is this design's choice.
//
// Interface: wr_en with wr_be (one bit per byte) and wr_data update the register at
// the clock edge; v0 is always readable; mask[i] is bit i of v0, the mask bit of
// element i. Cleared at reset.
module v0_mask_reg
  import rd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [VLENB-1:0] wr_be,
  input  vreg_t            wr_data,
  output vreg_t            v0,
  output logic [VLENB-1:0] mask
);

  vreg_t v0_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v0_q <= '0;
    else if (wr_en) begin
      for (int b = 0; b < VLENB; b++)
        if (wr_be[b]) v0_q[8*b +: 8] <= wr_data[8*b +: 8];
    end
  end

  assign v0   = v0_q;
  assign mask = v0_q[VLENB-1:0];

endmodule
