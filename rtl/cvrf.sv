// cvrf: the data half of the compact vector register file, in the execute (EX) stage.
//
// NPHYS physical vector registers of VLEN bits, built from flip-flops as in the
// evaluated design. They are addressed only by physical slot index: the mapping
// from architectural register to slot was resolved in decode by the tag array and
// travels through the ID/EX register. Three read ports serve vs1, vs2 and vd (the
// old destination value is needed by multiply-accumulate, by masked and tail
// elements, and as the data of a store or spill). One write port takes either the
// ALU result or data loaded from memory; the EX stage finishes at most one entry
// per cycle, so one port is enough. The port count is this design's choice.
//
// Timing: reads are combinational; a write lands at the clock edge and is seen by
// the next entry in EX. Slots are cleared at reset.
module cvrf
  import rd_pkg::*;
#(
  parameter int unsigned NPHYS = 8,
  localparam int unsigned K    = (NPHYS > 1) ? $clog2(NPHYS) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [K-1:0] rd_idx  [3],
  output vreg_t        rd_data [3],
  input  logic         wr_en,
  input  logic [K-1:0] wr_idx,
  input  vreg_t        wr_data
);

  vreg_t regs_q [NPHYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPHYS; i++) regs_q[i] <= '0;
    end else if (wr_en && 32'(wr_idx) < NPHYS) begin
      regs_q[wr_idx] <= wr_data;
    end
  end

  always_comb begin
    for (int p = 0; p < 3; p++)
      rd_data[p] = (32'(rd_idx[p]) < NPHYS) ? regs_q[rd_idx[p]] : '0;
  end

endmodule
