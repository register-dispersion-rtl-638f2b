// tb_cvrf_tag_array: random allocate/free traffic against a simple model of the tag
// array (one valid bit and register number per slot). Every cycle all three lookup
// ports are driven with random register numbers, biased towards mapped ones, and
// hit/index are compared with the model; the slot read port is checked as well.
module tb_cvrf_tag_array;
  import rd_pkg::*;

  localparam int NPHYS = 8;
  localparam int K = $clog2(NPHYS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [AREG_W-1:0] lk_areg [3];
  logic              lk_hit  [3];
  logic [K-1:0]      lk_idx  [3];
  logic              set_en = 1'b0, clr_en = 1'b0;
  logic [K-1:0]      set_idx = '0, clr_idx = '0, rd_idx = '0;
  logic [AREG_W-1:0] set_areg = '0;
  logic              rd_valid;
  logic [AREG_W-1:0] rd_areg;

  cvrf_tag_array #(.NPHYS(NPHYS)) dut (.*);

  int checks = 0, failures = 0;
  bit          m_valid [NPHYS];
  int unsigned m_tag   [NPHYS];

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

  function automatic bit mapped(int unsigned r, output int unsigned slot);
    for (int i = 0; i < NPHYS; i++) if (m_valid[i] && m_tag[i] == r) begin slot = i; return 1; end
    return 0;
  endfunction

  initial begin
    int unsigned s;
    for (int i = 0; i < NPHYS; i++) m_valid[i] = 0;
    for (int p = 0; p < 3; p++) lk_areg[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // lookups and read port against the model state
      for (int p = 0; p < 3; p++) begin
        if ($urandom_range(1) && m_valid[$urandom_range(NPHYS-1)]) begin
          int i;
          do i = $urandom_range(NPHYS-1); while (!m_valid[i]);
          lk_areg[p] = AREG_W'(m_tag[i]);
        end else lk_areg[p] = AREG_W'($urandom_range(31));
      end
      rd_idx = K'($urandom_range(NPHYS-1));
      #1;
      for (int p = 0; p < 3; p++) begin
        bit h;
        h = mapped(lk_areg[p], s);
        check(lk_hit[p] == h && (!h || lk_idx[p] == K'(s)),
              $sformatf("lookup v%0d: hit %0b idx %0d", lk_areg[p], lk_hit[p], lk_idx[p]));
      end
      check(rd_valid == m_valid[rd_idx] && (!rd_valid || rd_areg == AREG_W'(m_tag[rd_idx])),
            "slot read port");
      // next update: free a random slot and/or map an unmapped register into a free slot
      clr_en = 1'b0; set_en = 1'b0;
      if ($urandom_range(2) == 0) begin
        clr_idx = K'($urandom_range(NPHYS-1));
        clr_en  = 1'b1;
      end
      if ($urandom_range(1)) begin
        int unsigned r, f;
        int free_slots[$];
        for (int i = 0; i < NPHYS; i++) if (!m_valid[i] && !(clr_en && i == clr_idx)) free_slots.push_back(i);
        do r = $urandom_range(31); while (mapped(r, s));
        if (free_slots.size() > 0) begin
          f = free_slots[$urandom_range(free_slots.size()-1)];
          set_idx = K'(f); set_areg = AREG_W'(r); set_en = 1'b1;
        end
      end
      @(posedge clk);
      if (clr_en) m_valid[clr_idx] = 0;
      if (set_en) begin m_valid[set_idx] = 1; m_tag[set_idx] = set_areg; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
