// multicast_engine: the 1-to-N converter at the end of the payload pipeline.
// It copies every beat to each pipe whose bit is set in the beat's mask, so a
// collective result reaches all pipes that serve members of the communicator.
//
// A beat is offered to all masked outputs at once; each output takes it when
// its ready is high, and the beat is released from the input once every masked
// output has taken it (a per-output "done" bit remembers who has). Outputs
// therefore never block each other within a beat. A beat with an empty mask is
// dropped. No added latency. The paper compares the engine to the packet
// replication engine of P4 switches; this mask-based form is this design's.
module multicast_engine
  import acis_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  mcbeat_t              in_data,
  output logic [NUM_PIPES-1:0] out_valid,
  input  logic [NUM_PIPES-1:0] out_ready,
  output beat_t                out_beat,
  output logic                 ev_multi   // a beat went to more than one pipe
);
  logic [NUM_PIPES-1:0] mask, done_q, taken, all;

  assign mask      = in_data.mask[NUM_PIPES-1:0];
  assign out_beat  = in_data.beat;
  assign out_valid = {NUM_PIPES{in_valid}} & mask & ~done_q;
  assign taken     = out_valid & out_ready;
  assign all       = done_q | taken | ~mask;
  assign in_ready  = &all;
  assign ev_multi  = in_valid && in_ready && ($countones(mask) > 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= '0;
    else if (in_valid) done_q <= in_ready ? '0 : (done_q | taken);
  end
endmodule
