// pkt_arbiter: merges N packet streams into one, a whole packet at a time.
// These are the multiplexers at both ends of the payload pipeline (recirculate
// and ingress payload into the parser; ACiS results and the payload bypass
// queue into the output) and the "Other Pipes" inputs of the aggregation unit.
//
// When idle it grants the lowest-numbered requesting input after the one that
// won last (round robin). The grant is held until the beat flagged by LAST_OF
// passes, so packets never interleave. The output is combinational from the
// granted input (no added latency); an input's ready is the output ready while
// it holds the grant. The paper draws the multiplexers but gives no policy;
// round robin per packet is this design's choice.
module pkt_arbiter #(
  parameter type         T = acis_pkg::beat_t,
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  T             in_data [N],
  input  logic [N-1:0] in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output T             out_data,
  output logic         out_last
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] owner, last_win, pick;
  logic          any;

  // Round-robin choice among requesters, starting after last_win.
  always_comb begin
    pick = last_win;
    any  = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_win) + k) % N;
      if (!any && in_valid[idx]) begin
        any  = 1'b1;
        pick = IW'(idx);
      end
    end
  end

  logic [IW-1:0] sel;
  assign sel = locked ? owner : pick;

  always_comb begin
    in_ready  = '0;
    out_valid = locked ? in_valid[owner] : any;
    out_data  = in_data[sel];
    out_last  = in_last[sel];
    if (locked || any) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked   <= 1'b0;
      owner    <= '0;
      last_win <= IW'(N-1);
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        locked   <= 1'b0;
        last_win <= sel;
      end else begin
        locked <= 1'b1;
        owner  <= sel;
      end
    end
  end
endmodule
