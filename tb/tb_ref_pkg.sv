// tb_ref_pkg: reference model and instruction encoders shared by the testbenches.
//
// The reference works element by element on plain integers, written apart from
// the RTL: it extracts each element at the current SEW, computes the RISC-V "V"
// result, and writes it back only for active elements (i < vl and, for masked
// instructions, v0 bit i set). Encoders build the standard 32-bit instruction words.
package tb_ref_pkg;
  import rd_pkg::*;

  localparam logic [6:0] OPV = 7'b1010111;

  // ---------------------------------------------------------------- encoders
  function automatic logic [31:0] enc_opv(logic [5:0] f6, logic vm, logic [4:0] vs2,
                                          logic [4:0] vs1, logic [2:0] f3, logic [4:0] vd);
    return {f6, vm, vs2, vs1, f3, vd, OPV};
  endfunction

  function automatic logic [31:0] enc_vsetvli(logic [4:0] rd, logic [4:0] rs1, int sew_bits);
    logic [2:0] vsew;
    vsew = (sew_bits == 8) ? 3'd0 : (sew_bits == 16) ? 3'd1 : 3'd2;
    return {1'b0, 5'b0, vsew, 3'b000, rs1, 3'b111, rd, OPV};
  endfunction

  function automatic logic [31:0] enc_vsetivli(logic [4:0] rd, logic [4:0] uimm, int sew_bits);
    logic [2:0] vsew;
    vsew = (sew_bits == 8) ? 3'd0 : (sew_bits == 16) ? 3'd1 : 3'd2;
    return {2'b11, 4'b0, vsew, 3'b000, uimm, 3'b111, rd, OPV};
  endfunction

  function automatic logic [2:0] width_of(int eew);
    return (eew == 8) ? 3'b000 : (eew == 16) ? 3'b101 : 3'b110;
  endfunction

  function automatic logic [31:0] enc_vle(int eew, logic vm, logic [4:0] vd, logic [4:0] rs1);
    return {6'b000000, vm, 5'b00000, rs1, width_of(eew), vd, 7'b0000111};
  endfunction

  function automatic logic [31:0] enc_vse(int eew, logic vm, logic [4:0] vs3, logic [4:0] rs1);
    return {6'b000000, vm, 5'b00000, rs1, width_of(eew), vs3, 7'b0100111};
  endfunction

  // ---------------------------------------------------------------- reference
  // Arithmetic instruction kinds, by (funct3 class, funct6)
  typedef struct {
    logic [5:0] f6;
    bit         opm;   // OPMVV/OPMVX rather than OPIVV/OPIVX/OPIVI
    bit         vv, vx, vi;
    string      name;
  } op_desc_t;

  function automatic op_desc_t op_table(int i);
    op_desc_t t [17] = '{
      '{6'b000000, 0, 1, 1, 1, "vadd"},  '{6'b000010, 0, 1, 1, 0, "vsub"},
      '{6'b000011, 0, 0, 1, 1, "vrsub"}, '{6'b000100, 0, 1, 1, 0, "vminu"},
      '{6'b000101, 0, 1, 1, 0, "vmin"},  '{6'b000110, 0, 1, 1, 0, "vmaxu"},
      '{6'b000111, 0, 1, 1, 0, "vmax"},  '{6'b001001, 0, 1, 1, 1, "vand"},
      '{6'b001010, 0, 1, 1, 1, "vor"},   '{6'b001011, 0, 1, 1, 1, "vxor"},
      '{6'b010111, 0, 1, 1, 1, "vmerge"},'{6'b100101, 0, 1, 1, 1, "vsll"},
      '{6'b101000, 0, 1, 1, 1, "vsrl"},  '{6'b101001, 0, 1, 1, 1, "vsra"},
      '{6'b100101, 1, 1, 1, 0, "vmul"},  '{6'b101101, 1, 1, 1, 0, "vmacc"},
      '{6'b101001, 1, 1, 1, 0, "vmadd"}};
    return t[i];
  endfunction
  localparam int N_OPS = 17;

  function automatic longint unsigned get_el(vreg_t v, int w, int e);
    longint unsigned r = 0;
    for (int k = 0; k < w; k++) r[k] = v[e*w + k];
    return r;
  endfunction

  function automatic void set_el(ref vreg_t v, input int w, input int e, input longint unsigned x);
    for (int k = 0; k < w; k++) v[e*w + k] = x[k];
  endfunction

  function automatic longint sx(longint unsigned x, int w);
    return (x[w-1]) ? longint'(x) - (longint'(1) <<< w) : longint'(x);
  endfunction

  // One element: a = vs2, b = vs1/scalar/imm, c = old vd; returns the w-bit result.
  function automatic longint unsigned ref_el(string name, int w, longint unsigned a,
                                             longint unsigned b, longint unsigned c);
    longint unsigned m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    longint unsigned r;
    int sh = int'(b % 64'(w));
    a &= m; b &= m; c &= m;
    case (name)
      "vadd":   r = a + b;
      "vsub":   r = a - b;
      "vrsub":  r = b - a;
      "vand":   r = a & b;
      "vor":    r = a | b;
      "vxor":   r = a ^ b;
      "vminu":  r = (a < b) ? a : b;
      "vmaxu":  r = (a > b) ? a : b;
      "vmin":   r = (sx(a, w) < sx(b, w)) ? a : b;
      "vmax":   r = (sx(a, w) > sx(b, w)) ? a : b;
      "vsll":   r = a << sh;
      "vsrl":   r = a >> sh;
      "vsra":   r = longint'(sx(a, w) >>> sh);
      "vmul":   r = a * b;
      "vmacc":  r = a * b + c;
      "vmadd":  r = b * c + a;
      default:  r = b;  // vmerge / vmv
    endcase
    return r & m;
  endfunction

  // Whole arithmetic instruction. src: 0 = vv, 1 = vx, 2 = vi.
  function automatic vreg_t ref_arith(string name, int src, int sew_bits, int vl, bit vm,
                                      vreg_t v0, vreg_t vs1, vreg_t vs2, vreg_t vd,
                                      logic [31:0] scalar, logic [4:0] imm);
    vreg_t r = vd;
    int n = VLEN / sew_bits;
    longint unsigned b;
    bit shift = (name == "vsll" || name == "vsrl" || name == "vsra");
    for (int e = 0; e < n; e++) begin
      if (src == 0)      b = get_el(vs1, sew_bits, e);
      else if (src == 1) b = longint'(scalar);
      else               b = shift ? longint'(imm) : longint'(sx(longint'(imm), 5));
      if (e >= vl) continue;
      if (name == "vmerge") begin
        if (vm || v0[e]) set_el(r, sew_bits, e, ref_el(name, sew_bits, 0, b, 0));
        else             set_el(r, sew_bits, e, get_el(vs2, sew_bits, e));
      end else if (vm || v0[e]) begin
        set_el(r, sew_bits, e, ref_el(name, sew_bits, get_el(vs2, sew_bits, e), b,
                                      get_el(vd, sew_bits, e)));
      end
    end
    return r;
  endfunction

  // Byte mask of the active elements of a load or store
  function automatic logic [VLENB-1:0] ref_be(int eew, int vl, bit vm, vreg_t v0);
    logic [VLENB-1:0] be = '0;
    for (int e = 0; e < VLEN / eew; e++)
      if (e < vl && (vm || v0[e]))
        for (int k = 0; k < eew / 8; k++) be[e*eew/8 + k] = 1'b1;
    return be;
  endfunction

  function automatic vreg_t rand_vreg();
    vreg_t v;
    for (int i = 0; i < VLEN / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

endpackage
