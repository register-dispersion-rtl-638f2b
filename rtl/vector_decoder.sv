// vector_decoder: vector operation decoding in the ID stage.
//
// Turns one 32-bit RISC-V instruction into the control word (vdec_t) that the
// register-dispersion control unit and the EX stage use: which of vs1, vs2, vd are
// read, their 5-bit register numbers, the ALU operation, the source of the first
// operand (vector, scalar register, immediate), masking, and the element width of
// loads and stores. The field positions are those of the RISC-V "V" extension.
// The supported subset is this design's choice; the paper names only the block.
//   OP-V  OPIVV/OPIVX/OPIVI : vadd vsub vrsub vminu vmin vmaxu vmax vand vor vxor
//                             vmerge/vmv vsll vsrl vsra
//   OP-V  OPMVV/OPMVX       : vmul vmacc vmadd
//   OP-V  OPCFG             : vsetvli vsetivli (LMUL = 1, SEW 8/16/32)
//   LOAD-FP / STORE-FP      : unit-stride vle8/16/32, vse8/16/32
// Every arithmetic instruction and every load reads vd as well, as the paper's
// scheme requires all three operands to be resident. Anything else with a vector
// opcode sets illegal. Purely combinational.
module vector_decoder
  import rd_pkg::*;
(
  input  logic [31:0] instr,
  output vdec_t       dec
);

  localparam logic [6:0] OPC_OPV   = 7'b1010111;
  localparam logic [6:0] OPC_LOAD  = 7'b0000111;
  localparam logic [6:0] OPC_STORE = 7'b0100111;

  logic [5:0] funct6;
  logic [2:0] funct3;
  logic [6:0] opcode;
  logic       ok;

  always_comb begin
    opcode = instr[6:0];
    funct3 = instr[14:12];
    funct6 = instr[31:26];
    ok     = 1'b0;

    dec          = '0;
    dec.kind     = EX_ARITH;
    dec.op       = ALU_ADD;
    dec.src      = SRC_VEC;
    dec.eew      = SEW32;
    dec.vset_sew = SEW32;
    dec.vs1      = instr[19:15];
    dec.vs2      = instr[24:20];
    dec.vd       = instr[11:7];
    dec.vm       = instr[25];
    dec.imm      = instr[19:15];

    unique case (opcode)
      OPC_OPV: begin
        dec.valid = 1'b1;
        unique case (funct3)
          3'b000, 3'b011, 3'b100: begin  // OPIVV, OPIVI, OPIVX
            dec.src = (funct3 == 3'b000) ? SRC_VEC : (funct3 == 3'b011) ? SRC_IMM : SRC_XREG;
            ok = 1'b1;
            unique case (funct6)
              6'b000000: dec.op = ALU_ADD;
              6'b000010: begin dec.op = ALU_SUB;  ok = (funct3 != 3'b011); end
              6'b000011: begin dec.op = ALU_RSUB; ok = (funct3 != 3'b000); end
              6'b000100: begin dec.op = ALU_MINU; ok = (funct3 != 3'b011); end
              6'b000101: begin dec.op = ALU_MIN;  ok = (funct3 != 3'b011); end
              6'b000110: begin dec.op = ALU_MAXU; ok = (funct3 != 3'b011); end
              6'b000111: begin dec.op = ALU_MAX;  ok = (funct3 != 3'b011); end
              6'b001001: dec.op = ALU_AND;
              6'b001010: dec.op = ALU_OR;
              6'b001011: dec.op = ALU_XOR;
              6'b010111: dec.op = ALU_MERGE;
              6'b100101: dec.op = ALU_SLL;
              6'b101000: dec.op = ALU_SRL;
              6'b101001: dec.op = ALU_SRA;
              default:   ok = 1'b0;
            endcase
          end
          3'b010, 3'b110: begin  // OPMVV, OPMVX
            dec.src = (funct3 == 3'b010) ? SRC_VEC : SRC_XREG;
            ok = 1'b1;
            unique case (funct6)
              6'b100101: dec.op = ALU_MUL;
              6'b101101: dec.op = ALU_MACC;
              6'b101001: begin dec.op = ALU_MACC; dec.madd = 1'b1; end
              default:   ok = 1'b0;
            endcase
          end
          3'b111: begin  // OPCFG
            dec.kind = EX_VSET;
            if (instr[31] == 1'b0) begin         // vsetvli: zimm = instr[30:20]
              dec.avl_x0 = (instr[19:15] == 5'd0);
              ok = (instr[22:20] == 3'b000) && (instr[25:23] <= 3'd2);
            end else if (instr[31:30] == 2'b11) begin  // vsetivli: uimm = instr[19:15]
              dec.vset_imm = 1'b1;
              ok = (instr[22:20] == 3'b000) && (instr[25:23] <= 3'd2);
            end
            dec.vset_sew = sew_e'(instr[24:23]);
          end
          default: ok = 1'b0;
        endcase
        if (dec.kind == EX_ARITH) begin
          dec.use_vs1 = (dec.src == SRC_VEC);
          dec.use_vs2 = !(dec.op == ALU_MERGE && dec.vm);  // vmv.v.* has no vs2
          dec.use_vd  = 1'b1;
          if (dec.op == ALU_MERGE && dec.vm) ok = ok && (instr[24:20] == 5'd0);
        end
        dec.illegal = !ok;
        if (!ok) dec.valid = 1'b0;
      end
      OPC_LOAD, OPC_STORE: begin
        // funct3 000/101/110 with nf = 0, mew = 0, mop = 00 is a unit-stride vector
        // access; other widths on these opcodes belong to the scalar FP unit.
        if (funct3 == 3'b000 || funct3 == 3'b101 || funct3 == 3'b110) begin
          dec.kind = (opcode == OPC_LOAD) ? EX_VLOAD : EX_VSTORE;
          dec.eew  = (funct3 == 3'b000) ? SEW8 : (funct3 == 3'b101) ? SEW16 : SEW32;
          ok = (instr[31:26] == 6'b000000) && (instr[24:20] == 5'd0);
          dec.use_vd  = 1'b1;
          dec.valid   = ok;
          dec.illegal = !ok;
        end
      end
      default: ;
    endcase
  end

endmodule
