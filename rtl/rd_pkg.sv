// rd_pkg: constants and types shared by the register-dispersion vector unit.
//
// The vector unit is 256 bits wide and is built as eight 32-bit lanes; a vector
// register is exactly one 32-byte cache line, so one memory access moves one
// whole register. These three numbers follow the evaluated configuration. The
// instruction subset, the operation encoding and the ID/EX payload layout are
// this design's own choices (the RISC-V "V" field positions are the standard ones).
package rd_pkg;

  parameter int unsigned VLEN   = 256;          // bits per vector register
  parameter int unsigned ELEN   = 32;           // lane width in bits (8 lanes)
  parameter int unsigned VLENB  = VLEN / 8;     // bytes per register / cache line
  parameter int unsigned AREG_W = 5;            // width of an architectural register number
  parameter int unsigned VL_W   = $clog2(VLENB) + 1; // vl can be 0..32

  typedef logic [VLEN-1:0] vreg_t;

  // Selected element width
  typedef enum logic [1:0] {
    SEW8  = 2'd0,
    SEW16 = 2'd1,
    SEW32 = 2'd2
  } sew_e;

  // What an ID/EX entry asks the EX stage to do
  typedef enum logic [2:0] {
    EX_ARITH  = 3'd0,  // vector arithmetic through the ALU
    EX_VLOAD  = 3'd1,  // program unit-stride vector load
    EX_VSTORE = 3'd2,  // program unit-stride vector store
    EX_VSET   = 3'd3,  // vsetvli / vsetivli
    EX_SPILL  = 3'd4,  // dispersion micro-op: store an evicted register
    EX_FILL   = 3'd5   // dispersion micro-op: load a missing register
  } ex_kind_e;

  // ALU operations
  typedef enum logic [3:0] {
    ALU_ADD   = 4'd0,
    ALU_SUB   = 4'd1,
    ALU_RSUB  = 4'd2,
    ALU_AND   = 4'd3,
    ALU_OR    = 4'd4,
    ALU_XOR   = 4'd5,
    ALU_MINU  = 4'd6,
    ALU_MIN   = 4'd7,
    ALU_MAXU  = 4'd8,
    ALU_MAX   = 4'd9,
    ALU_SLL   = 4'd10,
    ALU_SRL   = 4'd11,
    ALU_SRA   = 4'd12,
    ALU_MUL   = 4'd13,
    ALU_MACC  = 4'd14,  // vd = vs1*vs2 + vd
    ALU_MERGE = 4'd15   // vmerge / vmv.v
  } alu_op_e;

  // Where the ALU's first operand comes from
  typedef enum logic [1:0] {
    SRC_VEC  = 2'd0,  // vs1
    SRC_XREG = 2'd1,  // scalar rs1 value, splatted
    SRC_IMM  = 2'd2   // 5-bit immediate, sign-extended and splatted
  } src_e;

  // Decoded vector instruction (output of the vector operation decoder)
  typedef struct packed {
    logic              valid;     // a vector instruction this unit executes
    logic              illegal;   // vector opcode but not in the supported subset
    ex_kind_e          kind;
    alu_op_e           op;
    logic              madd;      // ALU_MACC in vmadd form: vd = vs1*vd + vs2
    src_e              src;
    logic              use_vs1;
    logic              use_vs2;
    logic              use_vd;
    logic [AREG_W-1:0] vs1;
    logic [AREG_W-1:0] vs2;
    logic [AREG_W-1:0] vd;
    logic              vm;        // 1 = unmasked
    logic [4:0]        imm;
    sew_e              eew;       // element width of a load/store
    sew_e              vset_sew;  // SEW requested by vsetvli
    logic              vset_imm;  // vsetivli: AVL is the 5-bit immediate
    logic              avl_x0;    // vsetvli with rs1 = x0: AVL = VLMAX
  } vdec_t;

  // Byte enables of the elements that an instruction updates:
  // element i is active when i < vl and (vm or v0 bit i is set).
  function automatic logic [VLENB-1:0] active_bytes(sew_e sew, logic [VL_W-1:0] vl,
                                                    logic vm, vreg_t v0);
    logic [VLENB-1:0] be;
    int unsigned ebytes, idx;
    ebytes = (sew == SEW8) ? 1 : (sew == SEW16) ? 2 : 4;
    for (int unsigned b = 0; b < VLENB; b++) begin
      idx = b / ebytes;
      be[b] = (idx < vl) && (vm || v0[idx]);
    end
    return be;
  endfunction

  // Number of elements in one register at a given width
  function automatic logic [VL_W-1:0] vlmax(sew_e sew);
    return (sew == SEW8) ? VL_W'(VLENB) : (sew == SEW16) ? VL_W'(VLENB/2) : VL_W'(VLENB/4);
  endfunction

endpackage
