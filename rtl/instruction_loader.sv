// instruction_loader: fills the configuration tables (CTs) that hold the
// programs of the NUM_SPU SPUs and serves their instruction fetches.
//
// A load is started by `start` (from the AXI-Lite control block). For each
// SPU s with prog_len[s] > 0 it reads ceil(prog_len[s]/LANES) beats from
// instruction memory, starting at beat address base[s], through its own HBM
// read master (one outstanding read), and writes the LANES 32-bit instructions
// of each beat into CT s in order (lane 0 first). Then it records prog_len[s]
// as the SPU's active length and moves on; `busy` is high during the load and
// `done` pulses for one cycle at its end. An SPU whose length is 0 keeps an
// empty program and is bypassed. While a load runs, all active lengths read as
// 0, so no SPU starts on a half-written program. Each CT is a CT_DEPTH x 32
// array with one write port (the loader) and one combinational read port
// (fetch). The paper draws the loader, its CTs and read master; the load
// sequence and formats are this design's.
module instruction_loader
  import acis_pkg::*;
#(
  parameter int unsigned NUM_SPU  = 3,
  parameter int unsigned CT_DEPTH = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  addr_t                       base     [NUM_SPU],
  input  logic [$clog2(CT_DEPTH):0]   len      [NUM_SPU],
  output logic                        busy,
  output logic                        done,
  // HBM read master
  output logic                        rd_req_valid,
  input  logic                        rd_req_ready,
  output addr_t                       rd_req_addr,
  input  logic                        rd_rsp_valid,
  input  vec_t                        rd_rsp_data,
  // fetch ports
  input  logic [$clog2(CT_DEPTH)-1:0] fetch_pc   [NUM_SPU],
  output logic [31:0]                 fetch_instr[NUM_SPU],
  output logic [$clog2(CT_DEPTH):0]   prog_len   [NUM_SPU]
);
  localparam int unsigned PW = $clog2(CT_DEPTH);
  localparam int unsigned SW = (NUM_SPU > 1) ? $clog2(NUM_SPU) : 1;

  typedef enum logic [1:0] {ST_IDLE, ST_REQ, ST_WAIT} state_e;

  logic [31:0] ct [NUM_SPU][CT_DEPTH];
  logic [PW:0] act_len [NUM_SPU];
  state_e      state;
  logic [SW-1:0] spu_q;
  logic [PW:0]   wi_q;     // next CT index to write
  addr_t         addr_q;

  for (genvar s = 0; s < NUM_SPU; s++) begin : g_fetch
    assign fetch_instr[s] = ct[s][fetch_pc[s]];
    assign prog_len[s]    = busy ? '0 : act_len[s];
  end

  assign busy         = (state != ST_IDLE);
  assign rd_req_valid = (state == ST_REQ);
  assign rd_req_addr  = addr_q;

  // Advance to the next SPU with a non-empty program (or finish).
  logic          nxt_found;
  logic [SW-1:0] nxt_spu;
  always_comb begin
    nxt_found = 1'b0;
    nxt_spu   = '0;
    for (int s = NUM_SPU - 1; s >= 0; s--) begin
      if (s > int'(spu_q) && len[s] != '0) begin
        nxt_found = 1'b1;
        nxt_spu   = SW'(s);
      end
    end
  end

  logic          first_found;
  logic [SW-1:0] first_spu;
  always_comb begin
    first_found = 1'b0;
    first_spu   = '0;
    for (int s = NUM_SPU - 1; s >= 0; s--) begin
      if (len[s] != '0) begin
        first_found = 1'b1;
        first_spu   = SW'(s);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == ST_WAIT && rd_rsp_valid) begin
      for (int l = 0; l < LANES; l++) begin
        if (int'(wi_q) + l < int'(len[spu_q]) && int'(wi_q) + l < CT_DEPTH)
          ct[spu_q][PW'(int'(wi_q) + l)] <= rd_rsp_data[l];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_IDLE;
      spu_q  <= '0;
      wi_q   <= '0;
      addr_q <= '0;
      done   <= 1'b0;
      for (int s = 0; s < NUM_SPU; s++) act_len[s] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          for (int s = 0; s < NUM_SPU; s++) act_len[s] <= '0;
          if (first_found) begin
            state  <= ST_REQ;
            spu_q  <= first_spu;
            wi_q   <= '0;
            addr_q <= base[first_spu];
          end else begin
            done <= 1'b1;
          end
        end
        ST_REQ: if (rd_req_ready) state <= ST_WAIT;
        ST_WAIT: if (rd_rsp_valid) begin
          if (int'(wi_q) + LANES >= int'(len[spu_q])) begin
            act_len[spu_q] <= len[spu_q];
            if (nxt_found) begin
              state  <= ST_REQ;
              spu_q  <= nxt_spu;
              wi_q   <= '0;
              addr_q <= base[nxt_spu];
            end else begin
              state <= ST_IDLE;
              done  <= 1'b1;
            end
          end else begin
            state  <= ST_REQ;
            wi_q   <= wi_q + (PW+1)'(LANES);
            addr_q <= addr_q + 1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> len[0] <= (PW+1)'(CT_DEPTH));
endmodule
