// tb_rd_vpu: end-to-end test of the register-dispersion vector unit at its default
// size (8 physical vector registers, 256-bit vectors).
//
// A stream of vector instructions is sent as the scalar core would send it, and a
// reference model with a full 32-register file executes the same stream. The data
// memory is the behavioural model with random grant delays and 1-5 cycle reads.
//   Phase 1: six registers plus v0 are used (a working set that fits); after they
//            are resident, 64 back-to-back arithmetic instructions must issue one
//            per cycle with no fill, spill or stall.
//   Phase 2: random instructions over all 32 registers with random SEW, vl, masks,
//            loads and stores, so that misses, evictions and re-fetches happen.
//   Phase 3: a three-operand instruction whose operands all miss in a full cVRF.
// At the end every architectural register is stored with vse32 and compared with
// the reference, and every program store is compared byte for byte. The test also
// counts each mechanism (hit issue, fill into a free slot, eviction, masking, v0
// write, vsetvli, stall) and fails if one never happened.
module tb_rd_vpu;
  import rd_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NPHYS = 8;
  localparam logic [31:0] DATA_BASE = 32'h0000_1000;  // program data, 64 lines
  localparam logic [31:0] DUMP_BASE = 32'h0000_4000;  // final register dump

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid = 1'b0;
  logic [31:0]      in_instr = '0, in_rs1 = '0;
  logic             in_ready, in_illegal, xwb_valid;
  logic [31:0]      xwb_data;
  logic             mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0]      mem_addr;
  logic [VLENB-1:0] mem_be;
  vreg_t            mem_wdata, mem_rdata;
  logic [VL_W-1:0]  vl;
  sew_e             sew;
  logic [31:0]      cnt_lookups, cnt_fills, cnt_spills, cnt_stall_cycles;
  logic [3:0]       occupancy;

  rd_vpu dut (.*);

  data_mem_model u_mem (
    .clk, .rst_n, .mem_req, .mem_we, .mem_addr, .mem_be, .mem_wdata,
    .mem_gnt, .mem_rvalid, .mem_rdata
  );

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;

  // reference state
  vreg_t ref_v [32];
  int    ref_vl = 0, ref_sew = 32;
  vreg_t ref_mem [64];   // program data region, mirrors DATA_BASE

  // mechanism counters
  int n_masked = 0, n_v0_write = 0, n_vset = 0, n_load = 0, n_store = 0;
  int n_spill_seen = 0, n_fill_seen = 0, n_fill_free = 0, n_stall_issue = 0, n_hit_issue = 0;

  // A fill "into a free slot" is one not directly preceded by an eviction.
  bit last_uop_spill = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.uop_valid && dut.u_ctrl.uop_kind == EX_SPILL) begin
      n_spill_seen++;
      last_uop_spill = 1'b1;
    end
    if (dut.u_ctrl.uop_valid && dut.u_ctrl.uop_kind == EX_FILL) begin
      n_fill_seen++;
      if (!last_uop_spill) n_fill_free++;
      last_uop_spill = 1'b0;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Hand one instruction to the unit and wait until it is taken.
  bit stalled_this;
  task automatic send(logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    in_valid = 1'b1;
    in_instr = instr;
    in_rs1   = rs1;
    stalled_this = 1'b0;
    forever begin
      #1;
      if (in_ready) break;
      stalled_this = 1'b1;
      @(negedge clk);
    end
    @(posedge clk);
    #1 in_valid = 1'b0;
    if (stalled_this) n_stall_issue++; else n_hit_issue++;
  endtask

  // ---- reference-executed instruction helpers
  task automatic do_vset(int sew_bits, int avl, bit use_imm);
    int exp_vl;
    int vmax = VLEN / sew_bits;
    if (use_imm && avl > 31) avl = 31;   // vsetivli has a 5-bit AVL
    exp_vl = (avl > vmax) ? vmax : avl;
    if (use_imm) send(enc_vsetivli(5'd10, 5'(avl), sew_bits), 32'd0);
    else         send(enc_vsetvli(5'd10, 5'd11, sew_bits), 32'(avl));
    ref_vl = exp_vl;
    ref_sew = sew_bits;
    n_vset++;
    // the new vl is written back while the entry is in EX, the next cycle
    @(negedge clk);
    check(xwb_valid && xwb_data == 32'(exp_vl),
          $sformatf("vsetvli vl: got %0d valid %0b, want %0d", xwb_data, xwb_valid, exp_vl));
  endtask

  task automatic do_arith(int opi, int src, bit vm, int vd, int vs1, int vs2,
                          logic [31:0] scalar, logic [4:0] imm);
    op_desc_t d = op_table(opi);
    logic [2:0] f3;
    logic [4:0] f_vs1, f_vs2;
    f3 = d.opm ? ((src == 0) ? 3'b010 : 3'b110)
               : ((src == 0) ? 3'b000 : (src == 1) ? 3'b100 : 3'b011);
    f_vs1 = (src == 0) ? 5'(vs1) : (src == 1) ? 5'd12 : imm;
    f_vs2 = (d.name == "vmerge" && vm) ? 5'd0 : 5'(vs2);
    send(enc_opv(d.f6, vm, f_vs2, f_vs1, f3, 5'(vd)), scalar);
    ref_v[vd] = ref_arith(d.name, src, ref_sew, ref_vl, vm, ref_v[0], ref_v[vs1],
                          ref_v[f_vs2], ref_v[vd], scalar, imm);
    if (!vm) n_masked++;
    if (vd == 0) n_v0_write++;
  endtask

  task automatic do_load(int eew, bit vm, int vd, int line);
    logic [VLENB-1:0] be;
    send(enc_vle(eew, vm, 5'(vd), 5'd13), DATA_BASE + 32'(line) * VLENB);
    be = ref_be(eew, ref_vl, vm, ref_v[0]);
    for (int b = 0; b < VLENB; b++) if (be[b]) ref_v[vd][8*b +: 8] = ref_mem[line][8*b +: 8];
    if (vd == 0) n_v0_write++;
    if (!vm) n_masked++;
    n_load++;
  endtask

  task automatic do_store(int eew, bit vm, int vs3, int line);
    logic [VLENB-1:0] be;
    send(enc_vse(eew, vm, 5'(vs3), 5'd13), DATA_BASE + 32'(line) * VLENB);
    be = ref_be(eew, ref_vl, vm, ref_v[0]);
    for (int b = 0; b < VLENB; b++) if (be[b]) ref_mem[line][8*b +: 8] = ref_v[vs3][8*b +: 8];
    if (!vm) n_masked++;
    n_store++;
  endtask

  function automatic bit resident(int r);
    for (int i = 0; i < NPHYS; i++)
      if (dut.u_ctrl.u_tags.valid_q[i] && dut.u_ctrl.u_tags.tag_q[i] == 5'(r)) return 1'b1;
    return 1'b0;
  endfunction

  task automatic drain();
    repeat (40) @(posedge clk);
  endtask

  // random arithmetic instruction over a register list
  task automatic rand_arith(int regs[$], bit allow_mask);
    int opi, src, vd, vs1, vs2;
    bit vm;
    op_desc_t d;
    opi = $urandom_range(N_OPS - 1);
    d = op_table(opi);
    do src = $urandom_range(2);
    while (!((src == 0 && d.vv) || (src == 1 && d.vx) || (src == 2 && d.vi)));
    vm  = allow_mask ? ($urandom_range(3) != 0) : 1'b1;
    vd  = regs[$urandom_range(regs.size() - 1)];
    vs1 = regs[$urandom_range(regs.size() - 1)];
    vs2 = regs[$urandom_range(regs.size() - 1)];
    if (!vm && vd == 0) vd = regs[regs.size() - 1];   // masked write of v0 is reserved
    do_arith(opi, src, vm, vd, vs1, vs2, $urandom, 5'($urandom));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int regs_small[$];
    int regs_all[$];
    longint unsigned t0;
    int f0, s0, st0;
    vreg_t got;

    // The reference registers start at zero, like the reserved memory region and
    // the cleared v0; program data is random and shared with the memory model.
    for (int r = 0; r < 32; r++) ref_v[r] = '0;
    for (int l = 0; l < 64; l++) begin
      ref_mem[l] = rand_vreg();
      u_mem.poke(DATA_BASE + 32'(l) * VLENB, ref_mem[l]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---------------- phase 1: working set of six registers plus v0
    regs_small = '{0, 1, 2, 3, 4, 5, 6};
    do_vset(32, 8, 1'b0);
    for (int r = 0; r <= 6; r++) do_load(32, 1'b1, r, r);   // v0..v6 from memory
    for (int i = 0; i < 20; i++) rand_arith(regs_small, 1'b1);
    drain();
    f0 = cnt_fills; s0 = cnt_spills; st0 = cnt_stall_cycles;
    for (int i = 0; i < 64; i++) begin
      op_desc_t d;
      int opi;
      if (i == 1) t0 = cycle;
      do begin opi = $urandom_range(N_OPS - 1); d = op_table(opi); end while (!d.vv);
      do_arith(opi, 0, 1'b1, 1 + $urandom_range(5), 1 + $urandom_range(5),
               1 + $urandom_range(5), 0, 0);
    end
    check(cycle - t0 == 63, $sformatf("resident working set: 63 instructions took %0d cycles",
                                      cycle - t0));
    check(cnt_fills == f0 && cnt_spills == s0 && cnt_stall_cycles == st0,
          "resident working set caused fills, spills or stalls");
    check(occupancy == 4'd6, $sformatf("occupancy %0d, want 6", occupancy));

    // ---------------- phase 2: all registers, random sizes, masks, memory
    for (int r = 0; r < 32; r++) regs_all.push_back(r);
    for (int i = 0; i < 600; i++) begin
      int k, sb, vd;
      bit vm;
      k  = $urandom_range(99);
      vm = ($urandom_range(3) != 0);
      if (k < 6) begin
        sb = ($urandom_range(2) == 0) ? 8 : ($urandom_range(1) == 0) ? 16 : 32;
        do_vset(sb, $urandom_range(40), 1'($urandom_range(1)));
      end else if (k < 18) begin
        vd = $urandom_range(31);
        if (!vm && vd == 0) vd = 1;
        do_load(ref_sew, vm, vd, $urandom_range(63));
      end else if (k < 28) begin
        do_store(ref_sew, vm, $urandom_range(31), $urandom_range(63));
      end else begin
        rand_arith(regs_all, 1'b1);
      end
    end

    // ---------------- phase 3: three missing operands in a full cVRF
    begin
      int base;
      base = 9;
      do_vset(32, 8, 1'b1);
      // touch other registers until none of v9..v11 is resident
      for (int r = 20; resident(9) || resident(10) || resident(11) || occupancy != 4'(NPHYS); r++)
        do_arith(0, 1, 1'b1, 20 + (r % 12), 0, 20 + (r % 12), 32'(r), 0);
      f0 = cnt_fills; s0 = cnt_spills;
      do_arith(15, 0, 1'b1, base, base + 1, base + 2, 0, 0);   // vmacc v9, v10, v11
      drain();
      check(cnt_fills - f0 == 3 && cnt_spills - s0 == 3,
            $sformatf("three misses in a full cVRF: %0d fills, %0d spills",
                      cnt_fills - f0, cnt_spills - s0));
    end

    // ---------------- final dump and comparison
    do_vset(32, 8, 1'b1);
    for (int r = 0; r < 32; r++) send(enc_vse(32, 1'b1, 5'(r), 5'd13), DUMP_BASE + 32'(r) * VLENB);
    drain();
    for (int r = 0; r < 32; r++) begin
      got = u_mem.peek(DUMP_BASE + 32'(r) * VLENB);
      check(got == ref_v[r], $sformatf("v%0d: got %h want %h", r, got, ref_v[r]));
    end
    for (int l = 0; l < 64; l++)
      check(u_mem.peek(DATA_BASE + 32'(l) * VLENB) == ref_mem[l],
            $sformatf("program store line %0d differs", l));

    // every mechanism must have happened
    check(n_hit_issue > 0,   "no instruction issued without stalling");
    check(n_stall_issue > 0, "no instruction stalled");
    check(n_fill_free > 0,   "no fill into a free slot");
    check(n_spill_seen > 0,  "no eviction");
    check(n_masked > 0,      "no masked instruction");
    check(n_v0_write > 0,    "v0 never written");
    check(n_vset > 0,        "no vsetvli");
    check(n_load > 0 && n_store > 0, "no program load or store");
    check(cnt_spills == n_spill_seen && cnt_fills == n_fill_seen, "counter mismatch");

    $display("mechanisms: hit-issue=%0d stalled-issue=%0d fills=%0d (into free slot %0d) spills=%0d masked=%0d v0-writes=%0d vset=%0d loads=%0d stores=%0d stall-cycles=%0d lookups=%0d",
             n_hit_issue, n_stall_issue, cnt_fills, n_fill_free, cnt_spills, n_masked,
             n_v0_write, n_vset, n_load, n_store, cnt_stall_cycles, cnt_lookups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
