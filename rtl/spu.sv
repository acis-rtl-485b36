// spu: one SIMD processing unit (SPU) of the ACiS CGRA, the stage that runs a
// user-supplied map function on the packets streaming through it.
//
// Parts (one per box of the CGRA figure): PC logic, decoder (spu_decoder),
// scalar PE with a 32-entry register file (x0 reads as zero), vector PE
// (vector_pe) with a NUM_VREG-entry vector register file (VRF), an
// auto-increment unit of NUM_AR address registers, and read and write masters
// to the SPU's own memory bank. The program sits in this SPU's configuration
// table (CT) inside the instruction loader; the SPU fetches it through
// pc/instr with a combinational read.
//
// Operation: while idle, the SPU waits for the first beat of a packet on its
// input stream. It then runs its program from pc 0 with x31 cleared, one
// instruction per cycle, until HALT (or an illegal instruction, or pc reaching
// prog_len); then it waits for the next packet. POP takes a beat into a vector
// register and sets x31 to the beat's last flag, so a program loops until x31
// is 1. PUSH/PUSHL send a vector register downstream (PUSHL marks the packet's
// last beat; a program must send exactly one). POP stalls while the input is
// empty, PUSH while the output is not ready, VLD until the read data returns,
// VST until the write is acknowledged. VLD/VST address memory through an
// address register that then advances by one beat (auto-increment).
// When prog_len is 0 the SPU is bypassed: the input stream is wired to the
// output (the multiplexer in front of each VRF in the figure).
//
// The figure gives the parts and the paper says the ISA is RISC-V with wide
// vector support; sizes, the stream instructions, the single-issue timing and
// the memory handshake are this design's choices.
module spu
  import acis_pkg::*;
  import spu_pkg::*;
#(
  parameter int unsigned NUM_VREG = 8,
  parameter int unsigned NUM_AR   = 4,
  parameter int unsigned CT_DEPTH = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // instruction fetch from the CT
  output logic [$clog2(CT_DEPTH)-1:0] pc,
  input  logic [31:0]                 instr,
  input  logic [$clog2(CT_DEPTH):0]   prog_len,
  // stream in / out
  input  logic                        in_valid,
  output logic                        in_ready,
  input  beat_t                       in_beat,
  output logic                        out_valid,
  input  logic                        out_ready,
  output beat_t                       out_beat,
  // HBM read master (address channel, data channel)
  output logic                        rd_req_valid,
  input  logic                        rd_req_ready,
  output addr_t                       rd_req_addr,
  input  logic                        rd_rsp_valid,
  input  vec_t                        rd_rsp_data,
  // HBM write master (address+data channel, response)
  output logic                        wr_req_valid,
  input  logic                        wr_req_ready,
  output wr_req_t                     wr_req,
  input  logic                        wr_ack,
  // status
  output logic                        busy,
  output logic                        ev_mem    // a VLD or VST completed
);
  localparam int unsigned PW = $clog2(CT_DEPTH);
  localparam int unsigned VW = $clog2(NUM_VREG);
  localparam int unsigned RW = $clog2(NUM_AR);

  typedef enum logic [1:0] {ST_IDLE, ST_RUN, ST_WAIT_RD, ST_WAIT_WR} state_e;

  state_e    state;
  logic [PW:0] pc_q;
  word_t     xr  [32];
  vec_t      vrf [NUM_VREG];
  addr_t     ar  [NUM_AR];
  spu_ctrl_t d;

  assign pc   = pc_q[PW-1:0];
  assign busy = (state != ST_IDLE);

  spu_decoder u_dec (.instr(instr), .ctrl(d));

  // Register reads
  word_t xs1, xs2;
  vec_t  vs1, vs2, vsd, vb;
  assign xs1 = (d.rs1 == 5'd0) ? '0 : xr[d.rs1];
  assign xs2 = (d.rs2 == 5'd0) ? '0 : xr[d.rs2];
  assign vs1 = vrf[d.rs1[VW-1:0]];
  assign vs2 = vrf[d.rs2[VW-1:0]];
  assign vsd = vrf[d.rd[VW-1:0]];
  always_comb for (int l = 0; l < LANES; l++) vb[l] = d.vx ? xs2 : vs2[l];

  // Vector PE
  vec_t  vy;
  word_t vys;
  vector_pe u_vpe (.op(d.vop), .a(vs1), .b(vb), .c(vsd), .s(xs1), .amount(d.rs2),
                   .y(vy), .ys(vys));

  // Scalar PE
  word_t opb, alu_y;
  assign opb = d.use_imm ? d.imm : xs2;
  always_comb begin
    unique case (d.alu)
      A_ADD: alu_y = xs1 + opb;
      A_SUB: alu_y = xs1 - opb;
      A_AND: alu_y = xs1 & opb;
      A_OR:  alu_y = xs1 | opb;
      A_XOR: alu_y = xs1 ^ opb;
      A_SLL: alu_y = xs1 << opb[4:0];
      A_SRL: alu_y = xs1 >> opb[4:0];
      A_SLT: alu_y = {31'd0, $signed(xs1) < $signed(opb)};
      A_MUL: alu_y = xs1 * opb;
      A_LUI: alu_y = d.imm;
      default: alu_y = '0;
    endcase
  end

  // PC logic: branch decision
  logic taken;
  always_comb begin
    unique case (d.br)
      B_EQ: taken = xs1 == xs2;
      B_NE: taken = xs1 != xs2;
      B_LT: taken = $signed(xs1) < $signed(xs2);
      B_GE: taken = $signed(xs1) >= $signed(xs2);
      default: taken = 1'b0;
    endcase
  end

  logic running, bypass, end_prog;
  assign bypass   = (prog_len == '0);
  assign running  = (state == ST_RUN);
  assign end_prog = (pc_q >= prog_len) || d.kind == K_HALT || d.kind == K_ILL;

  // Stream and memory handshakes
  always_comb begin
    in_ready     = 1'b0;
    out_valid    = 1'b0;
    out_beat     = '{data: vs1, last: d.push_last};
    rd_req_valid = running && d.kind == K_VLD && !end_prog;
    rd_req_addr  = ar[d.rs1[RW-1:0]];
    wr_req_valid = running && d.kind == K_VST && !end_prog;
    wr_req       = '{addr: ar[d.rs1[RW-1:0]], data: vs2};
    if (bypass) begin
      in_ready  = out_ready;
      out_valid = in_valid;
      out_beat  = in_beat;
    end else if (running && !end_prog) begin
      if (d.kind == K_POP)  in_ready  = 1'b1;
      if (d.kind == K_PUSH) out_valid = 1'b1;
    end
  end

  // Does the current instruction finish this cycle?
  logic step;
  always_comb begin
    step = 1'b0;
    if (running && !end_prog) begin
      unique case (d.kind)
        K_POP:   step = in_valid;
        K_PUSH:  step = out_ready;
        K_VLD, K_VST: step = 1'b0;
        default: step = 1'b1;
      endcase
    end
  end

  assign ev_mem = (state == ST_WAIT_RD && rd_rsp_valid) || (state == ST_WAIT_WR && wr_ack);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      pc_q  <= '0;
      for (int i = 0; i < 32; i++) xr[i] <= '0;
      for (int i = 0; i < NUM_VREG; i++) vrf[i] <= '0;
      for (int i = 0; i < NUM_AR; i++) ar[i] <= '0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          if (!bypass && in_valid) begin
            state   <= ST_RUN;
            pc_q    <= '0;
            xr[31]  <= '0;
          end
        end
        ST_RUN: begin
          if (end_prog) begin
            state <= ST_IDLE;
          end else begin
            if (step) pc_q <= pc_q + 1'b1;
            unique case (d.kind)
              K_ALU:  if (d.rd != 5'd0) xr[d.rd] <= alu_y;
              K_BR:   if (taken) pc_q <= pc_q + (PW+1)'(d.imm >>> 2);
              K_VEC:  vrf[d.rd[VW-1:0]] <= vy;
              K_VRED: if (d.rd != 5'd0) xr[d.rd] <= vys;
              K_POP:  if (in_valid) begin
                        vrf[d.rd[VW-1:0]] <= in_beat.data;
                        xr[31] <= {31'd0, in_beat.last};
                      end
              K_SETA: ar[d.rd[RW-1:0]] <= xs1;
              K_VLD:  if (rd_req_ready) state <= ST_WAIT_RD;
              K_VST:  if (wr_req_ready) state <= ST_WAIT_WR;
              default: ;
            endcase
          end
        end
        ST_WAIT_RD: begin
          if (rd_rsp_valid) begin
            vrf[d.rd[VW-1:0]] <= rd_rsp_data;
            ar[d.rs1[RW-1:0]] <= ar[d.rs1[RW-1:0]] + 1;
            pc_q  <= pc_q + 1'b1;
            state <= ST_RUN;
          end
        end
        ST_WAIT_WR: begin
          if (wr_ack) begin
            ar[d.rs1[RW-1:0]] <= ar[d.rs1[RW-1:0]] + 1;
            pc_q  <= pc_q + 1'b1;
            state <= ST_RUN;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end
endmodule
