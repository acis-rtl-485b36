// tb_spu_decoder: checks the SPU instruction decoder. Instructions are built
// with the encoders of spu_asm_pkg (standard RV32I/M layouts for the scalar
// ones, the custom-0/custom-1 layouts for vector and stream ones) and the
// decoded record is compared field by field with the expected kind, operation,
// register numbers and immediate. Branch offsets of both signs, LUI, the
// scalar-splat vector form, every stream operation and several illegal words
// (RV32I loads and jumps, unknown funct7/funct3 values) are covered. The
// decoder is combinational: the record is sampled one time step later.
module tb_spu_decoder;
  import acis_pkg::*;
  import spu_pkg::*;
  import spu_asm_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] instr;
  spu_ctrl_t   ctrl;

  spu_decoder dut (.*);

  initial begin
    #100000;
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask

  task automatic dec(logic [31:0] w);
    instr = w; #1;
  endtask

  // scalar ALU instruction
  task automatic t_alu(logic [31:0] w, alu_e alu, bit imm, int rd, int rs1, int rs2_or_imm, string n);
    dec(w);
    check(ctrl.kind == K_ALU && ctrl.alu == alu && ctrl.use_imm == imm && ctrl.rd == 5'(rd), {n, " kind/op/rd"});
    if (alu != A_LUI) check(ctrl.rs1 == 5'(rs1), {n, " rs1"});
    if (imm) check(ctrl.imm == 32'(rs2_or_imm), {n, " immediate"});
    else check(ctrl.rs2 == 5'(rs2_or_imm), {n, " rs2"});
  endtask

  initial begin
    t_alu(addi(3, 4, -5), A_ADD, 1, 3, 4, -5, "addi");
    t_alu(addi(31, 0, 2047), A_ADD, 1, 31, 0, 2047, "addi max");
    t_alu({12'd12, 5'd2, 3'b111, 5'd7, OPC_OPIMM}, A_AND, 1, 7, 2, 12, "andi");
    t_alu({12'd12, 5'd2, 3'b110, 5'd7, OPC_OPIMM}, A_OR, 1, 7, 2, 12, "ori");
    t_alu({12'd12, 5'd2, 3'b100, 5'd7, OPC_OPIMM}, A_XOR, 1, 7, 2, 12, "xori");
    t_alu({12'd3, 5'd2, 3'b001, 5'd7, OPC_OPIMM}, A_SLL, 1, 7, 2, 3, "slli");
    t_alu({12'd3, 5'd2, 3'b101, 5'd7, OPC_OPIMM}, A_SRL, 1, 7, 2, 3, "srli");
    t_alu({12'hFFF, 5'd2, 3'b010, 5'd7, OPC_OPIMM}, A_SLT, 1, 7, 2, -1, "slti");
    t_alu(add(5, 6, 7), A_ADD, 0, 5, 6, 7, "add");
    t_alu(r_type(7'b0100000, 5'd9, 5'd8, 3'b000, 5'd1, OPC_OP), A_SUB, 0, 1, 8, 9, "sub");
    t_alu(r_type(7'd0, 5'd9, 5'd8, 3'b111, 5'd1, OPC_OP), A_AND, 0, 1, 8, 9, "and");
    t_alu(r_type(7'd0, 5'd9, 5'd8, 3'b110, 5'd1, OPC_OP), A_OR, 0, 1, 8, 9, "or");
    t_alu(r_type(7'd0, 5'd9, 5'd8, 3'b100, 5'd1, OPC_OP), A_XOR, 0, 1, 8, 9, "xor");
    t_alu(r_type(7'd0, 5'd9, 5'd8, 3'b001, 5'd1, OPC_OP), A_SLL, 0, 1, 8, 9, "sll");
    t_alu(r_type(7'd0, 5'd9, 5'd8, 3'b101, 5'd1, OPC_OP), A_SRL, 0, 1, 8, 9, "srl");
    t_alu(r_type(7'd0, 5'd9, 5'd8, 3'b010, 5'd1, OPC_OP), A_SLT, 0, 1, 8, 9, "slt");
    t_alu(mul(10, 11, 12), A_MUL, 0, 10, 11, 12, "mul");
    t_alu({20'hABCDE, 5'd4, OPC_LUI}, A_LUI, 1, 4, 0, 32'hABCDE000, "lui");

    // branches: offsets in instructions, immediate in bytes
    dec(beq(31, 0, -9));
    check(ctrl.kind == K_BR && ctrl.br == B_EQ && ctrl.rs1 == 5'd31 && ctrl.rs2 == 5'd0, "beq fields");
    check(ctrl.imm == -32'sd36, "beq backward offset");
    dec(bne(3, 4, 3));
    check(ctrl.kind == K_BR && ctrl.br == B_NE && ctrl.imm == 32'd12, "bne forward offset");
    dec(blt(1, 2, 1000));
    check(ctrl.kind == K_BR && ctrl.br == B_LT && ctrl.imm == 32'd4000, "blt long offset");
    dec(branch(3'b101, 1, 2, -1));
    check(ctrl.kind == K_BR && ctrl.br == B_GE && ctrl.imm == -32'sd4, "bge");

    // vector operations
    for (int op = 0; op <= 12; op++) begin
      dec(vop(vop_e'(op), 3, 1, 2));
      check(ctrl.vop == vop_e'(op) && !ctrl.vx && ctrl.rd == 5'd3 && ctrl.rs1 == 5'd1 &&
            ctrl.rs2 == 5'd2, $sformatf("vector op %0d fields", op));
      check(ctrl.kind == ((op == 9 || op == 10) ? K_VRED : K_VEC), $sformatf("vector op %0d kind", op));
    end
    dec(vopx(V_ADD, 1, 1, 5));
    check(ctrl.kind == K_VEC && ctrl.vx && ctrl.rs2 == 5'd5, "vector op with scalar operand");

    // stream and memory operations
    dec(vpop(4));      check(ctrl.kind == K_POP && ctrl.rd == 5'd4, "pop");
    dec(vpush(6));     check(ctrl.kind == K_PUSH && !ctrl.push_last && ctrl.rs1 == 5'd6, "push");
    dec(vpushl(6));    check(ctrl.kind == K_PUSH && ctrl.push_last && ctrl.rs1 == 5'd6, "pushl");
    dec(vld(3, 1));    check(ctrl.kind == K_VLD && ctrl.rd == 5'd3 && ctrl.rs1 == 5'd1, "vld");
    dec(vst(3, 2));    check(ctrl.kind == K_VST && ctrl.rs2 == 5'd3 && ctrl.rs1 == 5'd2, "vst");
    dec(seta(2, 7));   check(ctrl.kind == K_SETA && ctrl.rd == 5'd2 && ctrl.rs1 == 5'd7, "seta");
    dec(halt());       check(ctrl.kind == K_HALT, "halt");

    // illegal words
    dec({12'd0, 5'd1, 3'b010, 5'd2, 7'b0000011}); check(ctrl.kind == K_ILL, "load is illegal");
    dec({20'd0, 5'd1, 7'b1101111});               check(ctrl.kind == K_ILL, "jal is illegal");
    dec(r_type(7'd13, 5'd0, 5'd0, 3'b000, 5'd0, OPC_VEC)); check(ctrl.kind == K_ILL, "unknown vector op");
    dec(r_type(7'd0, 5'd0, 5'd0, 3'd6, 5'd0, OPC_STRM));   check(ctrl.kind == K_ILL, "unknown stream op");
    dec(r_type(7'b0100000, 5'd1, 5'd1, 3'b111, 5'd1, OPC_OP)); check(ctrl.kind == K_ILL, "bad funct7");
    dec(branch(3'b110, 1, 2, 1));                  check(ctrl.kind == K_ILL, "bltu not supported");
    dec(32'd0);                                    check(ctrl.kind == K_ILL, "all-zero word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
