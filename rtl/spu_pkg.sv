// spu_pkg: decoded-instruction record and small encodings private to the SPU
// (decoder output, scalar ALU operations, branch conditions). The instruction
// encodings themselves are in acis_pkg.
package spu_pkg;
  import acis_pkg::*;

  typedef enum logic [3:0] {
    K_ILL, K_ALU, K_BR, K_VEC, K_VRED, K_POP, K_PUSH, K_VLD, K_VST, K_SETA, K_HALT
  } kind_e;

  typedef enum logic [3:0] {
    A_ADD, A_SUB, A_AND, A_OR, A_XOR, A_SLL, A_SRL, A_SLT, A_MUL, A_LUI
  } alu_e;

  typedef enum logic [1:0] {B_EQ, B_NE, B_LT, B_GE} br_e;

  typedef struct packed {
    kind_e       kind;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [31:0] imm;
    alu_e        alu;
    logic        use_imm;
    br_e         br;
    vop_e        vop;
    logic        vx;
    logic        push_last;
  } spu_ctrl_t;
endpackage
