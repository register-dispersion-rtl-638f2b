// tb_vector_alu: every operation at every element width with random operands,
// random vl (0..VLMAX+) and random masks, compared with the element-by-element
// reference model. Checks both the result (with undisturbed masked-off and tail
// elements) and the byte enables.
module tb_vector_alu;
  import rd_pkg::*;
  import tb_ref_pkg::*;

  alu_op_e          op;
  logic             madd;
  src_e             src;
  sew_e             sew;
  logic [VL_W-1:0]  vl;
  logic             vm;
  vreg_t            v0, vs1, vs2, vd_old, result;
  logic [31:0]      scalar;
  logic [4:0]       imm;
  logic [VLENB-1:0] wr_be;

  vector_alu dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
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
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 6000; n++) begin
      op_desc_t d;
      int s, sb, nvl;
      vreg_t expv;
      logic [VLENB-1:0] expbe;
      d = op_table(n % N_OPS);
      do s = $urandom_range(2); while (!((s == 0 && d.vv) || (s == 1 && d.vx) || (s == 2 && d.vi)));
      sb  = (n / N_OPS) % 3 == 0 ? 8 : (n / N_OPS) % 3 == 1 ? 16 : 32;
      nvl = $urandom_range(VLEN / sb + 2);
      if (nvl > VLEN / sb) nvl = VLEN / sb;     // vl never exceeds VLMAX
      if ($urandom_range(3) == 0) nvl = VLEN / sb;
      op = op_of(d.name); madd = (d.name == "vmadd"); src = src_e'(s);
      sew = (sb == 8) ? SEW8 : (sb == 16) ? SEW16 : SEW32;
      vl = VL_W'(nvl); vm = ($urandom_range(2) != 0);
      v0 = rand_vreg(); vs1 = rand_vreg(); vs2 = rand_vreg(); vd_old = rand_vreg();
      if ($urandom_range(3) == 0) vs1 = {8{32'h0000_0007}};   // small shift amounts too
      scalar = $urandom; imm = 5'($urandom);
      #1;
      expv = ref_arith(d.name, s, sb, nvl, vm, v0, vs1, vs2, vd_old, scalar, imm);
      expbe = ref_be(sb, nvl, vm || d.name == "vmerge", v0);
      check(result == expv, $sformatf("%s src %0d sew %0d vl %0d vm %0b: got %h want %h",
                                      d.name, s, sb, nvl, vm, result, expv));
      check(wr_be == expbe, $sformatf("%s byte enables", d.name));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
