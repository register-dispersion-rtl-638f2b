// vector_alu: the vector arithmetic unit of the EX stage.
//
// A 256-bit register is processed in one pass by eight 32-bit lanes; with 8- or
// 16-bit elements each lane handles four or two elements. The paper gives the lane
// count, the 32-bit lane width and the 8/16/32-bit integer element widths; the
// operation set and the way sub-word elements are formed here (one result per
// element width, selected by SEW) are this design's choices. The bfloat16
// arithmetic of the evaluated engine is not included.
//
// Operands: a = vs2, b = vs1 or a splatted scalar/immediate, c = old vd.
//   add sub(a-b) rsub(b-a) and or xor minu min maxu max
//   sll srl sra (shift a by b mod SEW)   mul (low half)   macc: b*a + c
//   madd (op = MACC, madd = 1): b*c + a  merge: vm ? b : (v0[i] ? b : a)
// An element i is written when i < vl and (vm or v0 bit i); every other element
// keeps its old vd value (mask- and tail-undisturbed). vmerge writes every body
// element. Purely combinational: result is ready in the cycle the operands are.
module vector_alu
  import rd_pkg::*;
(
  input  alu_op_e          op,
  input  logic             madd,
  input  src_e             src,
  input  sew_e             sew,
  input  logic [VL_W-1:0]  vl,
  input  logic             vm,
  input  vreg_t            v0,
  input  vreg_t            vs1,
  input  vreg_t            vs2,
  input  vreg_t            vd_old,
  input  logic [31:0]      scalar,
  input  logic [4:0]       imm,
  output vreg_t            result,
  output logic [VLENB-1:0] wr_be      // bytes that the instruction updates
);

  // One element operation at width w (1..32). Inputs are zero-extended.
  function automatic logic [31:0] elem_op(alu_op_e o, logic md, int unsigned w,
                                          logic [31:0] a, logic [31:0] b, logic [31:0] c);
    logic [31:0] sa, sb, r, msk, prod, addend;
    int unsigned sh;
    sa  = 32'($signed(a << (32 - w)) >>> (32 - w));
    sb  = 32'($signed(b << (32 - w)) >>> (32 - w));
    sh  = b & (w - 1);
    msk = (w == 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 1);
    // one multiplier per element serves vmul, vmacc and vmadd
    prod   = b * ((o == ALU_MACC && md) ? c : a);
    addend = md ? a : c;
    unique case (o)
      ALU_ADD:   r = a + b;
      ALU_SUB:   r = a - b;
      ALU_RSUB:  r = b - a;
      ALU_AND:   r = a & b;
      ALU_OR:    r = a | b;
      ALU_XOR:   r = a ^ b;
      ALU_MINU:  r = (a < b) ? a : b;
      ALU_MIN:   r = ($signed(sa) < $signed(sb)) ? a : b;
      ALU_MAXU:  r = (a > b) ? a : b;
      ALU_MAX:   r = ($signed(sa) > $signed(sb)) ? a : b;
      ALU_SLL:   r = a << sh;
      ALU_SRL:   r = a >> sh;
      ALU_SRA:   r = 32'($signed(sa) >>> sh);
      ALU_MUL:   r = prod;
      ALU_MACC:  r = prod + addend;
      ALU_MERGE: r = b;
      default:   r = a;
    endcase
    return r & msk;
  endfunction

  vreg_t       r8, r16, r32, raw, body;
  logic [VLENB-1:0] merge_sel;
  logic        is_vmerge;
  logic [31:0] bsc;          // scalar or immediate operand before narrowing
  logic        use_imm_u;    // shifts take the immediate unsigned

  always_comb begin
    use_imm_u = (op == ALU_SLL) || (op == ALU_SRL) || (op == ALU_SRA);
    unique case (src)
      SRC_XREG: bsc = scalar;
      SRC_IMM:  bsc = use_imm_u ? {27'd0, imm} : {{27{imm[4]}}, imm};
      default:  bsc = '0;
    endcase

    for (int unsigned e = 0; e < VLENB; e++)
      r8[8*e +: 8] = elem_op(op, madd, 8, {24'd0, vs2[8*e +: 8]},
                             (src == SRC_VEC) ? {24'd0, vs1[8*e +: 8]} : {24'd0, bsc[7:0]},
                             {24'd0, vd_old[8*e +: 8]})[7:0];
    for (int unsigned e = 0; e < VLENB/2; e++)
      r16[16*e +: 16] = elem_op(op, madd, 16, {16'd0, vs2[16*e +: 16]},
                                (src == SRC_VEC) ? {16'd0, vs1[16*e +: 16]} : {16'd0, bsc[15:0]},
                                {16'd0, vd_old[16*e +: 16]})[15:0];
    for (int unsigned e = 0; e < VLENB/4; e++)
      r32[32*e +: 32] = elem_op(op, madd, 32, vs2[32*e +: 32],
                                (src == SRC_VEC) ? vs1[32*e +: 32] : bsc,
                                vd_old[32*e +: 32]);
    unique case (sew)
      SEW8:    raw = r8;
      SEW16:   raw = r16;
      default: raw = r32;
    endcase

    // vmerge with vm = 0 picks vs1/scalar where v0 is set, vs2 elsewhere, and
    // writes every body element.
    is_vmerge = (op == ALU_MERGE) && !vm;
    merge_sel = active_bytes(sew, vl, 1'b0, v0);
    wr_be     = active_bytes(sew, vl, vm || is_vmerge, v0);
    for (int unsigned b = 0; b < VLENB; b++) begin
      body[8*b +: 8]   = (is_vmerge && !merge_sel[b]) ? vs2[8*b +: 8] : raw[8*b +: 8];
      result[8*b +: 8] = wr_be[b] ? body[8*b +: 8] : vd_old[8*b +: 8];
    end
  end

endmodule
