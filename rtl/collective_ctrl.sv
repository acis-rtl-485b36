// collective_ctrl: the collective control plugin. It holds the communicator
// context as a lookup table indexed by the communicator id of each packet and
// attaches that context (ctl_t: group size, CGRA use, multicast mask, hit) to
// every beat on its way to the aggregation unit.
//
// The table has NUM_COMM entries and is written by the control plane through
// cfg_we/cfg_idx/cfg_entry (one entry per cycle, any time). The lookup is
// registered: an input beat is accepted into a one-entry output register, so
// the unit adds one cycle of latency and sustains one beat per cycle. A packet
// whose communicator has no valid entry leaves with hit=0 and the aggregation
// unit forwards it untouched. The paper says the plugin is built from lookup
// tables; the entry format and table size are this design's choice.
module collective_ctrl
  import acis_pkg::*;
#(
  parameter int unsigned NUM_COMM = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic [$clog2(NUM_COMM)-1:0] cfg_idx,
  input  ctl_t                        cfg_entry,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  meta_t                       in_meta,
  input  beat_t                       in_beat,
  output logic                        out_valid,
  input  logic                        out_ready,
  output mbeat_t                      out_data
);
  localparam int unsigned IW = $clog2(NUM_COMM);

  ctl_t table_q [NUM_COMM];
  ctl_t hit_entry;

  always_comb begin
    hit_entry = table_q[in_meta.comm_id[IW-1:0]];
    if (in_meta.comm_id >= 8'(NUM_COMM)) hit_entry = '0;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_COMM; i++) table_q[i] <= '0;
    end else if (cfg_we) begin
      table_q[cfg_idx] <= cfg_entry;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= '{meta: in_meta, ctl: hit_entry, beat: in_beat};
    end
  end
endmodule
