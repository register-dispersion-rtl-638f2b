// data_mem_model: behavioural model of the data-memory side seen by the vector unit.
//
// Stands in for the L1 data cache and main memory (2 MB), which belong to the
// scalar core and are not part of this RTL. It accepts one line-wide (32-byte)
// request at a time. A request is granted in the cycle it is presented when the
// model is ready; readiness is randomised so that grants are sometimes delayed.
// A write takes effect at the grant, honouring byte enables. A read returns its
// data LAT_MIN..LAT_MAX cycles after the grant (1-5 cycles, the main-memory
// latency range of the evaluated system), with mem_rvalid high for one cycle.
// Addresses wrap inside the 2 MB array. Tasks give direct (zero-time) access for
// preloading and checking.
module data_mem_model
  import rd_pkg::*;
#(
  parameter int unsigned LINES   = 65536,  // 2 MB of 32-byte lines
  parameter int unsigned LAT_MIN = 1,
  parameter int unsigned LAT_MAX = 5,
  parameter int unsigned GNT_PCT = 70      // chance, in percent, of being ready
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mem_req,
  input  logic             mem_we,
  input  logic [31:0]      mem_addr,
  input  logic [VLENB-1:0] mem_be,
  input  vreg_t            mem_wdata,
  output logic             mem_gnt,
  output logic             mem_rvalid,
  output vreg_t            mem_rdata
);

  vreg_t       lines [LINES];
  logic        ready_q, pending_q;
  int unsigned wait_q;
  vreg_t       rdata_q;
  int unsigned n_reads, n_writes;

  function automatic int unsigned line_of(logic [31:0] a);
    return (a / VLENB) % LINES;
  endfunction

  function automatic vreg_t peek(logic [31:0] a);
    return lines[line_of(a)];
  endfunction

  task automatic poke(logic [31:0] a, vreg_t d);
    lines[line_of(a)] = d;
  endtask

  initial begin
    for (int i = 0; i < LINES; i++) lines[i] = '0;
    n_reads = 0;
    n_writes = 0;
  end

  assign mem_gnt    = ready_q && !pending_q;
  assign mem_rvalid = pending_q && (wait_q == 0);
  assign mem_rdata  = rdata_q;

  always @(posedge clk) begin
    if (!rst_n) begin
      ready_q   <= 1'b0;
      pending_q <= 1'b0;
      wait_q    <= 0;
      rdata_q   <= '0;
    end else begin
      ready_q <= ($urandom_range(99) < GNT_PCT);
      if (mem_rvalid) pending_q <= 1'b0;
      else if (pending_q) wait_q <= wait_q - 1;
      if (mem_req && mem_gnt) begin
        if (mem_we) begin
          for (int b = 0; b < VLENB; b++)
            if (mem_be[b]) lines[line_of(mem_addr)][8*b +: 8] = mem_wdata[8*b +: 8];
          n_writes++;
        end else begin
          pending_q <= 1'b1;
          wait_q    <= $urandom_range(LAT_MAX, LAT_MIN) - 1;
          rdata_q   <= lines[line_of(mem_addr)];
          n_reads++;
        end
      end
    end
  end

endmodule
