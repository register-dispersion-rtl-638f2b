// tb_rd_vpu_gemv: the integer GemV workload (y = A * x, 32-bit) on cVRFs of
// several sizes, each run on its own rd_vpu instance.
//
// Kernel A uses 8 accumulators plus a temporary, nine active vector registers
// like the GemV entry of the evaluation; it runs with 3 to 9, 16 and 31 slots.
// Kernel B groups the same loop into 7 accumulators (eight active registers) and
// runs with 8 and 31 slots. 31 slots hold every dispersable register, so those
// runs behave like a full-size register file and are the reference for the
// normalised performance that is printed together with the hit rate.
// Checks: every run produces the right y; a run whose slots cover its active
// registers takes only compulsory misses (one fill per register, no spill); the
// 3-slot run must evict. Results are printed, not compared against the paper's
// figures, because its GemV code is not given.
module tb_rd_vpu_gemv;
  localparam int N = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 11;
  localparam int SIZES [NCFG] = '{3, 4, 5, 6, 7, 8, 9, 16, 31, 8, 31};
  localparam int ACC_N [NCFG] = '{8, 8, 8, 8, 8, 8, 8, 8, 8, 7, 7};
  localparam int ROWS  [NCFG] = '{128, 128, 128, 128, 128, 128, 128, 128, 128, 112, 112};
  localparam int FULL  [NCFG] = '{8, 8, 8, 8, 8, 8, 8, 8, 8, 10, 10};   // index of the matching 31-slot run
  logic   done     [NCFG];
  int     checks_r [NCFG], failures_r [NCFG];
  longint cyc_r    [NCFG], look_r [NCFG], fill_r [NCFG], spill_r [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_run
    tb_gemv_runner #(.NPHYS(SIZES[g]), .ACCS(ACC_N[g]), .M(ROWS[g]), .N(N)) u_run (
      .clk, .rst_n, .done(done[g]), .checks(checks_r[g]), .failures(failures_r[g]),
      .cycles(cyc_r[g]), .lookups(look_r[g]), .fills(fill_r[g]), .spills(spill_r[g]));
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_done();
    for (int g = 0; g < NCFG; g++) if (!done[g]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!all_done()) @(posedge clk);
    for (int g = 0; g < NCFG; g++) begin
      checks += checks_r[g];
      failures += failures_r[g];
      $display("GemV %0dx%0d, %0d active regs, NPHYS=%0d: cycles=%0d perf=%0.3f lookups=%0d fills=%0d spills=%0d hit_rate=%0.3f",
               ROWS[g], N, ACC_N[g] + 1, SIZES[g], cyc_r[g], real'(cyc_r[FULL[g]]) / real'(cyc_r[g]),
               look_r[g], fill_r[g], spill_r[g], 1.0 - real'(fill_r[g]) / real'(look_r[g]));
      if (SIZES[g] > ACC_N[g]) begin
        checks++;
        if (!(fill_r[g] <= 64'(ACC_N[g] + 1) && spill_r[g] == 0)) begin
          failures++;
          $display("FAIL: NPHYS=%0d holds the working set but took %0d fills, %0d spills",
                   SIZES[g], fill_r[g], spill_r[g]);
        end
      end
    end
    checks++;
    if (spill_r[0] == 0) begin
      failures++;
      $display("FAIL: 3-slot run never evicted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
