// sync_fifo: single-clock first-in first-out queue with a valid/ready interface
// on both sides. It is the "Queue" of the payload bypass and header bypass
// paths and the Stream-In / Stream-Out FIFOs of the CGRA.
//
// Storage is a circular array of DEPTH entries of type T with read and write
// pointers one bit wider than the index. A push (in_valid && in_ready) and a pop
// (out_valid && out_ready) may happen in the same cycle. Data written in cycle t
// is visible at out_data in cycle t+1 (no fall-through). in_ready is low when
// full; out_valid is high whenever the queue is not empty. Depth and element
// type are this design's choice; the paper only names the queues.
module sync_fifo #(
  parameter type         T     = acis_pkg::beat_t,
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  T mem [DEPTH];
  logic [AW:0] wptr, rptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign count     = wptr - rptr;
  assign in_ready  = count < (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  // A full queue never accepts and an empty one never delivers.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(DEPTH));
endmodule
