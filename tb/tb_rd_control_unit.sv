// tb_rd_control_unit: checks the dispersion decisions of the control unit against a
// model of the paper's policy. The model keeps the resident registers as a FIFO of
// (slot, register) pairs. For each random instruction (random operands in use,
// operands drawn from v0..v31) and random ID/EX back-pressure it predicts, cycle by
// cycle: issue with the correct slot of every operand when all hit; otherwise, for
// the first missing operand in vs1, vs2, vd order, a FILL into the tail slot when a
// slot is free, or a SPILL of the oldest resident register (FIFO head) when full.
// It also checks that no micro-op or issue happens without ex_ready, that a
// resident working set issues without stalls, and that v0 is never looked up.
module tb_rd_control_unit;
  import rd_pkg::*;

  localparam int NPHYS = 8;
  localparam int K = $clog2(NPHYS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              dec_valid = 1'b0, ex_ready = 1'b0;
  logic              use_op [3];
  logic [AREG_W-1:0] areg   [3];
  logic              issue, stall, uop_valid;
  logic [K-1:0]      tag    [3];
  ex_kind_e          uop_kind;
  logic [K-1:0]      uop_pidx;
  logic [AREG_W-1:0] uop_areg;
  logic [K:0]        occupancy;

  rd_control_unit #(.NPHYS(NPHYS)) dut (.*);

  int checks = 0, failures = 0;
  int n_fill = 0, n_spill = 0, n_hit_issue = 0;
  int unsigned q_slot[$], q_reg[$];
  int unsigned m_tail = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int slot_of(int unsigned r);
    foreach (q_reg[i]) if (q_reg[i] == r) return int'(q_slot[i]);
    return -1;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run one instruction to issue; returns the number of stall cycles.
  task automatic run_instr(bit u0, bit u1, bit u2, int r0, int r1, int r2, output int stalls);
    bit done;
    stalls = 0;
    @(negedge clk);
    use_op = '{u0, u1, u2};
    areg   = '{AREG_W'(r0), AREG_W'(r1), AREG_W'(r2)};
    dec_valid = 1'b1;
    done = 0;
    while (!done) begin
      int first = -1;
      bit full;
      ex_ready = ($urandom_range(3) != 0);
      #1;
      for (int p = 0; p < 3; p++)
        if (first < 0 && use_op[p] && areg[p] != 0 && slot_of(areg[p]) < 0) first = p;
      full = (q_reg.size() == NPHYS);
      check(occupancy == (K+1)'(q_reg.size()), "occupancy");
      if (!ex_ready) begin
        check(!issue && !uop_valid && stall, "activity without ex_ready");
      end else if (first < 0) begin
        check(issue && !uop_valid && !stall, "all operands hit but no issue");
        for (int p = 0; p < 3; p++)
          if (use_op[p] && areg[p] != 0)
            check(tag[p] == K'(slot_of(areg[p])),
                  $sformatf("operand %0d (v%0d) slot %0d, want %0d", p, areg[p], tag[p], slot_of(areg[p])));
        done = 1;
      end else if (!full) begin
        check(!issue && uop_valid && uop_kind == EX_FILL && uop_pidx == K'(m_tail) &&
              uop_areg == areg[first],
              $sformatf("expected FILL v%0d into slot %0d, got valid %0b kind %s slot %0d v%0d",
                        areg[first], m_tail, uop_valid, uop_kind.name(), uop_pidx, uop_areg));
        q_slot.push_back(m_tail); q_reg.push_back(areg[first]);
        m_tail = (m_tail + 1) % NPHYS;
        n_fill++;
      end else begin
        check(!issue && uop_valid && uop_kind == EX_SPILL && uop_pidx == K'(q_slot[0]) &&
              uop_areg == AREG_W'(q_reg[0]),
              $sformatf("expected SPILL of v%0d from slot %0d, got valid %0b kind %s slot %0d v%0d",
                        q_reg[0], q_slot[0], uop_valid, uop_kind.name(), uop_pidx, uop_areg));
        void'(q_slot.pop_front()); void'(q_reg.pop_front());
        n_spill++;
      end
      if (!done) stalls++;
      @(posedge clk);
      @(negedge clk);
    end
    dec_valid = 1'b0;
  endtask

  initial begin
    int st;
    use_op = '{0, 0, 0};
    areg   = '{0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // random instructions over all registers
    for (int n = 0; n < 1500; n++)
      run_instr($urandom_range(1), $urandom_range(1), $urandom_range(3) != 0,
                $urandom_range(31), $urandom_range(31), $urandom_range(31), st);
    // a working set of 5 registers that stays resident: no stalls apart from
    // cycles without ex_ready, which the model counts as stalls too, so use ex_ready = 1
    for (int n = 0; n < 20; n++) run_instr(1, 1, 1, 1 + n % 5, 1 + (n + 1) % 5, 1 + (n + 2) % 5, st);
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      use_op = '{1, 1, 1};
      areg = '{AREG_W'(1 + n % 5), AREG_W'(1 + (n + 3) % 5), AREG_W'(1 + (n + 4) % 5)};
      dec_valid = 1'b1; ex_ready = 1'b1;
      #1 check(issue && !stall && !uop_valid, "resident operand stalled");
      n_hit_issue++;
    end
    @(negedge clk) dec_valid = 1'b0;
    check(n_fill > 0 && n_spill > 0, "fills and spills both exercised");
    $display("fills=%0d spills=%0d", n_fill, n_spill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
