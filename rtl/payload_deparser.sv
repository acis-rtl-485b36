// payload_deparser: the payload-level deparser. It puts a payload header back
// in front of each packet leaving the ACiS pipeline, so the egress side sees
// the same packet format the ingress side delivered.
//
// For each packet it first sends one header beat built from the packet's
// metadata (pack_header, with nbeats set to the length the packet now has),
// then the data beats unchanged. Every beat leaves with the multicast mask of
// the communicator (ctl.mcast_mask); a packet with no table entry is sent to
// pipe 0 only. One beat per cycle; the header costs one extra cycle per packet.
// The paper names the deparser and its role; the format is this design's own.
module payload_deparser
  import acis_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  mbeat_t  in_data,
  output logic    out_valid,
  input  logic    out_ready,
  output mcbeat_t out_data
);
  logic in_body;   // header of the current packet already sent
  logic [MAX_PIPES-1:0] mask;

  assign mask = in_data.ctl.hit ? in_data.ctl.mcast_mask : MAX_PIPES'(1);

  always_comb begin
    out_valid = in_valid;
    out_data.mask = mask;
    if (!in_body) begin
      out_data.beat.data = pack_header(in_data.meta);
      out_data.beat.last = 1'b0;
      in_ready = 1'b0;
    end else begin
      out_data.beat = in_data.beat;
      in_ready = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_body <= 1'b0;
    else if (out_valid && out_ready) in_body <= !out_data.beat.last;
  end
endmodule
