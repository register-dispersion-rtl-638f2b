// tb_vector_ldst_unit: drives program loads/stores and dispersion spills/fills
// through the load/store unit into the behavioural memory (random grant delay,
// 1-5 cycle reads). Checks: spills and fills use line VREG_BASE + (v-1)*32 and move
// the whole register; program stores write only active elements; program loads
// merge loaded elements into the old value; every entry takes exactly one memory
// transfer; done comes at the grant of a write and with the read data of a read.
module tb_vector_ldst_unit;
  import rd_pkg::*;
  import tb_ref_pkg::*;

  localparam logic [31:0] VREG_BASE = 32'h001F_FC00;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              op_valid = 1'b0;
  ex_kind_e          kind = EX_FILL;
  logic [AREG_W-1:0] areg = '0;
  logic [31:0]       addr = '0;
  sew_e              eew = SEW32;
  logic [VL_W-1:0]   vl = '0;
  logic              vm = 1'b1;
  vreg_t             v0 = '0, vd_data = '0;
  logic              done, wr_en;
  vreg_t             wr_data;
  logic              mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0]       mem_addr;
  logic [VLENB-1:0]  mem_be;
  vreg_t             mem_wdata, mem_rdata;

  vector_ldst_unit #(.VREG_BASE(VREG_BASE)) dut (.*);
  data_mem_model u_mem (.clk, .rst_n, .mem_req, .mem_we, .mem_addr, .mem_be, .mem_wdata,
                        .mem_gnt, .mem_rvalid, .mem_rdata);

  int checks = 0, failures = 0;
  int transfers = 0;
  always @(posedge clk) if (rst_n && mem_req && mem_gnt) transfers++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one entry; returns wr_data of the done cycle
  task automatic run(output vreg_t got, output bit got_wr);
    int t0;
    t0 = transfers;
    op_valid = 1'b1;
    forever begin
      #1;
      if (done) break;
      @(negedge clk);
    end
    got = wr_data; got_wr = wr_en;
    // a write completes at its grant; a read with the returned data
    if (kind == EX_SPILL || kind == EX_VSTORE) check(mem_req && mem_gnt, "write done without grant");
    else check(mem_rvalid, "read done without data");
    @(posedge clk);
    #1 op_valid = 1'b0;
    check(transfers - t0 == 1, $sformatf("%0d memory transfers for one entry", transfers - t0));
    @(negedge clk);
  endtask

  initial begin
    vreg_t got, line, expv;
    bit got_wr;
    logic [31:0] a;
    logic [VLENB-1:0] be;
    int sb, nvl;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < 1500; n++) begin
      kind = ex_kind_e'(($urandom_range(3) == 0) ? EX_VLOAD : ($urandom_range(2) == 0) ? EX_VSTORE :
                        ($urandom_range(1) ? EX_SPILL : EX_FILL));
      areg = AREG_W'(1 + $urandom_range(30));
      addr = 32'h0000_2000 + 32'($urandom_range(63)) * VLENB;
      sb = ($urandom_range(2) == 0) ? 8 : ($urandom_range(1) ? 16 : 32);
      eew = (sb == 8) ? SEW8 : (sb == 16) ? SEW16 : SEW32;
      nvl = $urandom_range(VLEN / sb);
      vl = VL_W'(nvl); vm = ($urandom_range(2) != 0);
      v0 = rand_vreg(); vd_data = rand_vreg();
      a = (kind == EX_SPILL || kind == EX_FILL) ? VREG_BASE + 32'(areg - 1) * VLENB : addr;
      line = rand_vreg();
      u_mem.poke(a, line);
      be = (kind == EX_SPILL || kind == EX_FILL) ? '1 : ref_be(sb, nvl, vm, v0);
      run(got, got_wr);
      case (kind)
        EX_SPILL: check(u_mem.peek(a) == vd_data, $sformatf("spill of v%0d", areg));
        EX_FILL:  check(got_wr && got == line, $sformatf("fill of v%0d", areg));
        EX_VSTORE: begin
          expv = line;
          for (int b = 0; b < VLENB; b++) if (be[b]) expv[8*b +: 8] = vd_data[8*b +: 8];
          check(u_mem.peek(a) == expv, "program store bytes");
        end
        default: begin
          expv = vd_data;
          for (int b = 0; b < VLENB; b++) if (be[b]) expv[8*b +: 8] = line[8*b +: 8];
          check(got_wr && got == expv, "program load merge");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
