// spu_decoder: instruction decoder of one SIMD processing unit (SPU).
//
// Purely combinational: splits a 32-bit instruction into a spu_ctrl_t record
// for the SPU's scalar PE, vector PE, stream and memory logic. Scalar
// instructions are the RV32I/RV32M subset ADDI, ANDI, ORI, XORI, SLLI, SRLI,
// ADD, SUB, AND, OR, XOR, SLL, SRL, SLT, MUL, LUI, BEQ, BNE, BLT, BGE in their
// standard encodings. Vector operations use opcode custom-0 (funct7 selects the
// operation, funct3[2] makes the second operand the scalar x[rs2] splat), and
// stream/memory operations use custom-1 (funct3 selects POP, PUSH, PUSHL, VLD,
// VST, SETA, HALT). Anything else decodes as illegal and the SPU stops the
// packet program. The paper states that the CGRA's target ISA is RISC-V; the
// vector/stream extension and its encodings are this design's own.
module spu_decoder
  import acis_pkg::*;
  import spu_pkg::*;
(
  input  logic [31:0] instr,
  output spu_ctrl_t   ctrl
);
  logic [6:0] opc, f7;
  logic [2:0] f3;

  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];

  always_comb begin
    ctrl        = '0;
    ctrl.kind   = K_ILL;
    ctrl.rd     = instr[11:7];
    ctrl.rs1    = instr[19:15];
    ctrl.rs2    = instr[24:20];
    ctrl.imm    = {{20{instr[31]}}, instr[31:20]};
    ctrl.vop    = vop_e'(f7);
    ctrl.vx     = f3[2];
    unique case (opc)
      OPC_OPIMM: begin
        ctrl.kind    = K_ALU;
        ctrl.use_imm = 1'b1;
        unique case (f3)
          3'b000: ctrl.alu = A_ADD;
          3'b111: ctrl.alu = A_AND;
          3'b110: ctrl.alu = A_OR;
          3'b100: ctrl.alu = A_XOR;
          3'b001: ctrl.alu = A_SLL;
          3'b101: ctrl.alu = A_SRL;
          3'b010: ctrl.alu = A_SLT;
          default: ctrl.kind = K_ILL;
        endcase
      end
      OPC_OP: begin
        ctrl.kind = K_ALU;
        unique case ({f7, f3})
          {7'b0000000, 3'b000}: ctrl.alu = A_ADD;
          {7'b0100000, 3'b000}: ctrl.alu = A_SUB;
          {7'b0000000, 3'b111}: ctrl.alu = A_AND;
          {7'b0000000, 3'b110}: ctrl.alu = A_OR;
          {7'b0000000, 3'b100}: ctrl.alu = A_XOR;
          {7'b0000000, 3'b001}: ctrl.alu = A_SLL;
          {7'b0000000, 3'b101}: ctrl.alu = A_SRL;
          {7'b0000000, 3'b010}: ctrl.alu = A_SLT;
          {7'b0000001, 3'b000}: ctrl.alu = A_MUL;
          default: ctrl.kind = K_ILL;
        endcase
      end
      OPC_LUI: begin
        ctrl.kind    = K_ALU;
        ctrl.alu     = A_LUI;
        ctrl.use_imm = 1'b1;
        ctrl.imm     = {instr[31:12], 12'd0};
      end
      OPC_BRANCH: begin
        ctrl.kind = K_BR;
        ctrl.imm  = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
        unique case (f3)
          3'b000: ctrl.br = B_EQ;
          3'b001: ctrl.br = B_NE;
          3'b100: ctrl.br = B_LT;
          3'b101: ctrl.br = B_GE;
          default: ctrl.kind = K_ILL;
        endcase
      end
      OPC_VEC: begin
        if (f7 <= 7'(V_MAC)) begin
          ctrl.kind = (f7 == 7'(V_REDSUM) || f7 == 7'(V_EXT)) ? K_VRED : K_VEC;
        end
      end
      OPC_STRM: begin
        unique case (f3)
          3'(S_POP):   ctrl.kind = K_POP;
          3'(S_PUSH):  ctrl.kind = K_PUSH;
          3'(S_PUSHL): begin ctrl.kind = K_PUSH; ctrl.push_last = 1'b1; end
          3'(S_VLD):   ctrl.kind = K_VLD;
          3'(S_VST):   ctrl.kind = K_VST;
          3'(S_SETA):  ctrl.kind = K_SETA;
          3'(S_HALT):  ctrl.kind = K_HALT;
          default:     ctrl.kind = K_ILL;
        endcase
      end
      default: ;
    endcase
  end
endmodule
