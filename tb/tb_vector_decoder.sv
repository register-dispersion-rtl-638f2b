// tb_vector_decoder: encodes every supported instruction form with random register
// fields and checks the decoded control word; also checks that unsupported forms
// are flagged illegal and that scalar floating-point loads are left alone.
module tb_vector_decoder;
  import rd_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] instr;
  vdec_t       dec;

  vector_decoder dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (instr %h)", what, instr); end
  endtask

  function automatic alu_op_e op_of(string name);
    case (name)
      "vadd": return ALU_ADD;   "vsub": return ALU_SUB;   "vrsub": return ALU_RSUB;
      "vminu": return ALU_MINU; "vmin": return ALU_MIN;   "vmaxu": return ALU_MAXU;
      "vmax": return ALU_MAX;   "vand": return ALU_AND;   "vor": return ALU_OR;
      "vxor": return ALU_XOR;   "vmerge": return ALU_MERGE; "vsll": return ALU_SLL;
      "vsrl": return ALU_SRL;   "vsra": return ALU_SRA;   "vmul": return ALU_MUL;
      default: return ALU_MACC;
    endcase
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      op_desc_t d;
      int src;
      logic [4:0] vd, vs1, vs2;
      logic vm;
      logic [2:0] f3;
      d = op_table($urandom_range(N_OPS - 1));
      do src = $urandom_range(2); while (!((src == 0 && d.vv) || (src == 1 && d.vx) || (src == 2 && d.vi)));
      vd = 5'($urandom); vs1 = 5'($urandom); vs2 = 5'($urandom); vm = 1'($urandom);
      if (d.name == "vmerge" && vm) vs2 = 0;
      f3 = d.opm ? ((src == 0) ? 3'b010 : 3'b110) : ((src == 0) ? 3'b000 : (src == 1) ? 3'b100 : 3'b011);
      instr = enc_opv(d.f6, vm, vs2, vs1, f3, vd);
      #1;
      check(dec.valid && !dec.illegal && dec.kind == EX_ARITH, $sformatf("%s valid", d.name));
      check(dec.op == op_of(d.name) && dec.madd == (d.name == "vmadd"), $sformatf("%s op", d.name));
      check(dec.src == src_e'(src), $sformatf("%s src", d.name));
      check(dec.use_vs1 == (src == 0) && dec.use_vs2 == !(d.name == "vmerge" && vm) && dec.use_vd,
            $sformatf("%s operand use", d.name));
      check(dec.vd == vd && dec.vs2 == vs2 && dec.vm == vm && (src == 0 ? dec.vs1 == vs1 : dec.imm == vs1),
            $sformatf("%s fields", d.name));
    end
    // loads and stores
    for (int n = 0; n < 300; n++) begin
      int eew;
      bit st;
      logic [4:0] vd;
      eew = ($urandom_range(2) == 0) ? 8 : ($urandom_range(1) ? 16 : 32);
      st = 1'($urandom); vd = 5'($urandom);
      instr = st ? enc_vse(eew, 1'($urandom), vd, 5'($urandom)) : enc_vle(eew, 1'($urandom), vd, 5'($urandom));
      #1;
      check(dec.valid && dec.kind == (st ? EX_VSTORE : EX_VLOAD) && dec.vd == vd && dec.use_vd &&
            !dec.use_vs1 && !dec.use_vs2, "load/store kind and operands");
      check(dec.eew == ((eew == 8) ? SEW8 : (eew == 16) ? SEW16 : SEW32), "load/store width");
    end
    // vsetvli / vsetivli
    for (int n = 0; n < 300; n++) begin
      int sb;
      bit im;
      logic [4:0] rs1;
      sb = ($urandom_range(2) == 0) ? 8 : ($urandom_range(1) ? 16 : 32);
      im = 1'($urandom); rs1 = 5'($urandom);
      instr = im ? enc_vsetivli(5'd1, rs1, sb) : enc_vsetvli(5'd1, rs1, sb);
      #1;
      check(dec.valid && dec.kind == EX_VSET && !dec.use_vs1 && !dec.use_vs2 && !dec.use_vd, "vset kind");
      check(dec.vset_sew == ((sb == 8) ? SEW8 : (sb == 16) ? SEW16 : SEW32), "vset sew");
      check(dec.vset_imm == im && dec.avl_x0 == (!im && rs1 == 0) && (!im || dec.imm == rs1), "vset avl");
    end
    // unsupported forms
    instr = enc_opv(6'b111111, 1, 5'd1, 5'd2, 3'b000, 5'd3); #1 check(!dec.valid && dec.illegal, "unknown funct6");
    instr = enc_opv(6'b000010, 1, 5'd1, 5'd2, 3'b011, 5'd3); #1 check(!dec.valid && dec.illegal, "vsub.vi");
    instr = enc_opv(6'b000000, 1, 5'd1, 5'd2, 3'b001, 5'd3); #1 check(!dec.valid && dec.illegal, "float op");
    instr = {1'b1, 6'b0, 5'd2, 5'd1, 3'b111, 5'd1, 7'b1010111}; #1 check(!dec.valid && dec.illegal, "vsetvl");
    instr = enc_vsetvli(5'd1, 5'd2, 32) | 32'h0010_0000;     #1 check(!dec.valid && dec.illegal, "LMUL 2");
    instr = 32'h0000_2007;                                   #1 check(!dec.valid && !dec.illegal, "scalar flw");
    instr = 32'h0000_0013;                                   #1 check(!dec.valid && !dec.illegal, "addi");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
