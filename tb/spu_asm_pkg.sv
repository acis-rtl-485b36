// spu_asm_pkg: instruction encoders for SPU programs written in testbenches,
// plus reference programs (prefix sum, scale-store-reload, dot product,
// sparse multiply-accumulate). Scalar encoders produce standard RV32I/RV32M
// words; vector and stream encoders produce the custom-0 / custom-1 words
// decoded by spu_decoder.
package spu_asm_pkg;
  import acis_pkg::*;

  function automatic logic [31:0] r_type(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                         logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b000, 5'(rd), OPC_OPIMM};
  endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);
    return r_type(7'd0, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), OPC_OP);
  endfunction
  function automatic logic [31:0] mul(int rd, int rs1, int rs2);
    return r_type(7'd1, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), OPC_OP);
  endfunction
  // branch offset in instructions (converted to the RISC-V byte offset)
  function automatic logic [31:0] branch(logic [2:0] f3, int rs1, int rs2, int off);
    logic [12:0] b;
    b = 13'(off * 4);
    return {b[12], b[10:5], 5'(rs2), 5'(rs1), f3, b[4:1], b[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return branch(3'b000, rs1, rs2, off); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return branch(3'b001, rs1, rs2, off); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return branch(3'b100, rs1, rs2, off); endfunction

  function automatic logic [31:0] vop(vop_e op, int vd, int vs1, int vs2);
    return r_type(7'(op), 5'(vs2), 5'(vs1), 3'b000, 5'(vd), OPC_VEC);
  endfunction
  function automatic logic [31:0] vopx(vop_e op, int vd, int vs1, int xs2);
    return r_type(7'(op), 5'(xs2), 5'(vs1), 3'b100, 5'(vd), OPC_VEC);
  endfunction
  function automatic logic [31:0] strm(sop_e op, int rd, int rs1, int rs2);
    return r_type(7'd0, 5'(rs2), 5'(rs1), 3'(op), 5'(rd), OPC_STRM);
  endfunction
  function automatic logic [31:0] vpop(int vd);    return strm(S_POP, vd, 0, 0);   endfunction
  function automatic logic [31:0] vpush(int vs);   return strm(S_PUSH, 0, vs, 0);  endfunction
  function automatic logic [31:0] vpushl(int vs);  return strm(S_PUSHL, 0, vs, 0); endfunction
  function automatic logic [31:0] vld(int vd, int ar);  return strm(S_VLD, vd, ar, 0); endfunction
  function automatic logic [31:0] vst(int vs, int ar);  return strm(S_VST, 0, ar, vs); endfunction
  function automatic logic [31:0] seta(int ar, int rs1) ; return strm(S_SETA, ar, rs1, 0); endfunction
  function automatic logic [31:0] halt();           return strm(S_HALT, 0, 0, 0);  endfunction

  // Inclusive prefix sum over a whole packet (the "op" of allgather-op-allgather):
  // per beat a two-step Hillis-Steele scan across the 3 lanes plus the carry.
  localparam int PSUM_LEN = 12;
  function automatic logic [31:0] psum_prog(int i);
    logic [31:0] p [PSUM_LEN];
    p[0]  = addi(5, 0, 0);            // carry = 0
    p[1]  = vpop(1);                  // loop:
    p[2]  = vop(V_SLIDEUP, 2, 1, 1);
    p[3]  = vop(V_ADD, 1, 1, 2);
    p[4]  = vop(V_SLIDEUP, 2, 1, 2);
    p[5]  = vop(V_ADD, 1, 1, 2);
    p[6]  = vopx(V_ADD, 1, 1, 5);     // + carry
    p[7]  = vop(V_EXT, 5, 1, LANES-1);// carry = last lane
    p[8]  = bne(31, 0, 3);            // last beat -> p[11]
    p[9]  = vpush(1);
    p[10] = beq(0, 0, -9);            // -> p[1]
    p[11] = vpushl(1);
    return (i < PSUM_LEN) ? p[i] : halt();
  endfunction

  // Scale every element by 2 and keep a copy of each result beat in memory,
  // then read the copy back and send it: exercises VST, VLD and auto-increment.
  localparam int STORE_LEN = 12;
  function automatic logic [31:0] store_prog(int i);
    logic [31:0] p [STORE_LEN];
    p[0]  = addi(6, 0, 16);           // x6 = 16 (memory base)
    p[1]  = seta(0, 6);               // ar0 = 16 (store pointer)
    p[2]  = seta(1, 6);               // ar1 = 16 (load pointer)
    p[3]  = vpop(1);                  // loop:
    p[4]  = vop(V_ADD, 1, 1, 1);      // v1 = 2*v1
    p[5]  = vst(1, 0);                // mem[ar0++] = v1
    p[6]  = vld(3, 1);                // v3 = mem[ar1++]
    p[7]  = bne(31, 0, 3);            // last -> p[10]
    p[8]  = vpush(3);
    p[9]  = beq(0, 0, -6);            // -> p[3]
    p[10] = vpushl(3);
    p[11] = halt();
    return (i < STORE_LEN) ? p[i] : halt();
  endfunction

  // Dot product of a packet with itself: one output beat, every lane holding
  // the sum of squares of all elements (a user-defined reduction).
  localparam int DOT_LEN = 9;
  function automatic logic [31:0] dot_prog(int i);
    logic [31:0] p [DOT_LEN];
    p[0] = addi(5, 0, 0);             // acc = 0
    p[1] = vpop(1);                   // loop:
    p[2] = vop(V_MUL, 2, 1, 1);
    p[3] = vop(V_REDSUM, 6, 2, 0);    // x6 = sum of lanes
    p[4] = add(5, 5, 6);
    p[5] = beq(31, 0, -4);            // not last -> p[1]
    p[6] = vop(V_SPLAT, 3, 5, 0);
    p[7] = vpushl(3);
    p[8] = halt();
    return (i < DOT_LEN) ? p[i] : halt();
  endfunction

  // Sparse multiply-accumulate into the memory bank: every input beat is
  // {lane 0: row, lane 1: a, lane 2: x} and adds a*x to lane 2 of memory beat
  // `row` (read, V_MAC, write back). The packet's last updated row is sent on.
  localparam int SPMV_LEN = 15;
  function automatic logic [31:0] spmv_prog(int i);
    logic [31:0] p [SPMV_LEN];
    p[0]  = addi(1, 0, -1);
    p[1]  = vop(V_SPLAT, 4, 1, 0);    // v4 = all ones
    p[2]  = vop(V_SLIDEUP, 4, 4, 2);  // v4 = {0, 0, ~0}: keeps lane 2
    p[3]  = vpop(1);                  // loop: v1 = {row, a, x}
    p[4]  = vop(V_EXT, 2, 1, 0);      // x2 = row
    p[5]  = seta(0, 2);               // ar0 = row (load)
    p[6]  = seta(1, 2);               // ar1 = row (store)
    p[7]  = vld(3, 0);                // v3 = mem[row]
    p[8]  = vop(V_SLIDEUP, 2, 1, 1);  // v2 = {0, row, a}
    p[9]  = vop(V_AND, 2, 2, 4);      // v2 = {0, 0, a}
    p[10] = vop(V_MAC, 3, 1, 2);      // v3 += v1 * v2: lane 2 += a*x
    p[11] = vst(3, 1);                // mem[row] = v3
    p[12] = beq(31, 0, -9);           // not last -> p[3]
    p[13] = vpushl(3);
    p[14] = halt();
    return (i < SPMV_LEN) ? p[i] : halt();
  endfunction
endpackage
