// tb_v0_mask_reg: random byte-enabled writes to the dedicated v0 register, checked
// against a model after every edge, including the element mask bits.
module tb_v0_mask_reg;
  import rd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             wr_en = 1'b0;
  logic [VLENB-1:0] wr_be = '0;
  vreg_t            wr_data = '0, v0;
  logic [VLENB-1:0] mask;

  v0_mask_reg dut (.*);

  int checks = 0, failures = 0;
  vreg_t model = '0;

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
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 check(v0 == '0, "v0 not cleared by reset");
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(3) != 0);
      wr_be   = ($urandom_range(1) == 1) ? '1 : VLENB'($urandom);
      wr_data = rand_vreg();
      @(posedge clk);
      if (wr_en) for (int b = 0; b < VLENB; b++) if (wr_be[b]) model[8*b +: 8] = wr_data[8*b +: 8];
      #1;
      check(v0 == model, "v0 contents");
      check(mask == model[VLENB-1:0], "mask bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
