// hbm_model: behavioural model of one off-chip memory bank (HBM pseudo-channel)
// as seen by an ACiS read master and write master. Not synthesizable and not
// part of the design: it stands in for the vendor memory in testbenches.
//
// Storage is DEPTH beats, zero at start. Read: an accepted address (always
// accepted while no read is pending) returns its beat LATENCY cycles later on
// rd_rsp_valid/rd_rsp_data. Write: an accepted request (one at a time) stores
// its data and pulses wr_ack LATENCY cycles later. Testbenches preload and
// inspect the array through the `mem` variable.
module hbm_model
  import acis_pkg::*;
#(
  parameter int unsigned DEPTH   = 256,
  parameter int unsigned LATENCY = 4
) (
  input  logic    clk,
  input  logic    rd_req_valid,
  output logic    rd_req_ready,
  input  addr_t   rd_req_addr,
  output logic    rd_rsp_valid,
  output vec_t    rd_rsp_data,
  input  logic    wr_req_valid,
  output logic    wr_req_ready,
  input  wr_req_t wr_req,
  output logic    wr_ack
);
  vec_t mem [DEPTH];
  int   rd_wait = 0, wr_wait = 0;
  addr_t rd_addr_q;

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  assign rd_req_ready = (rd_wait == 0);
  assign wr_req_ready = (wr_wait == 0);

  initial begin
    rd_rsp_valid = 0; rd_rsp_data = '0; wr_ack = 0;
  end

  always @(posedge clk) begin
    rd_rsp_valid <= 0;
    wr_ack <= 0;
    if (rd_wait > 1) rd_wait <= rd_wait - 1;
    else if (rd_wait == 1) begin
      rd_wait <= 0;
      rd_rsp_valid <= 1;
      rd_rsp_data  <= mem[rd_addr_q % DEPTH];
    end else if (rd_req_valid) begin
      rd_wait   <= LATENCY;
      rd_addr_q <= rd_req_addr;
    end
    if (wr_wait > 1) wr_wait <= wr_wait - 1;
    else if (wr_wait == 1) begin
      wr_wait <= 0;
      wr_ack  <= 1;
    end else if (wr_req_valid) begin
      wr_wait <= LATENCY;
      mem[wr_req.addr % DEPTH] <= wr_req.data;
    end
  end
endmodule
