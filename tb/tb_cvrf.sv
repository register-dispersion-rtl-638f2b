// tb_cvrf: writes random 256-bit values into random slots of the cVRF data array
// and reads all three ports every cycle, comparing with a model array. Also checks
// that a write is visible on the read ports only after the clock edge.
module tb_cvrf;
  import rd_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPHYS = 8;
  localparam int K = $clog2(NPHYS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [K-1:0] rd_idx  [3];
  vreg_t        rd_data [3];
  logic         wr_en = 1'b0;
  logic [K-1:0] wr_idx = '0;
  vreg_t        wr_data = '0;

  cvrf #(.NPHYS(NPHYS)) dut (.*);

  int checks = 0, failures = 0;
  vreg_t model [NPHYS];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NPHYS; i++) model[i] = '0;
    for (int p = 0; p < 3; p++) rd_idx[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(1) == 1);
      wr_idx  = K'($urandom_range(NPHYS-1));
      wr_data = rand_vreg();
      rd_idx[0] = wr_idx;   // same slot as the write: must show the old value
      rd_idx[1] = K'($urandom_range(NPHYS-1));
      rd_idx[2] = K'($urandom_range(NPHYS-1));
      #1;
      for (int p = 0; p < 3; p++)
        check(rd_data[p] == model[rd_idx[p]], $sformatf("port %0d slot %0d", p, rd_idx[p]));
      @(posedge clk);
      if (wr_en) model[wr_idx] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
