// acis_top: the ACiS payload pipeline of one switch pipe, the plugin that adds
// collective processing (reductions, gathers, user map functions) to a
// protocol-independent switch without touching its header pipeline.
//
// Packets arrive from the ingress parser (pl_in) or from the recirculation
// path (rc_in) and are merged a packet at a time. The payload parser reads the
// MPI payload header: packets not marked for ACiS go through the payload
// bypass queue untouched. ACiS packets get their communicator context from the
// collective control table, are merged with the contributions arriving from
// the other pipes (op_in, already parsed and looked up there), and enter the
// aggregation unit. Completed results of communicators with CGRA use enabled
// pass through the CGRA (three SPUs running the loaded map function); the
// others skip it. The deparser puts a payload header back on, and the
// multicast engine copies the packet to every pipe in the communicator's mask:
// pipe 0 is this pipe's output (pl_out, shared with the payload bypass queue),
// pipes 1..NUM_PIPES-1 leave on mc_out towards the traffic manager. Headers,
// handled by the existing match-action stages, pass through the header bypass
// queue (hdr_in to hdr_out) beside the payload pipeline.
//
// The memories of the CGRA (instruction memory and one bank per SPU) are
// off-chip, so their read/write masters are ports; so is the AXI-Lite
// control port. ev_* outputs pulse once per event for monitoring.
//
// The order of the plugins and the bypass paths follow the paper's switch
// figure; the packet format, the steering rule and all sizes are this design's.
module acis_top
  import acis_pkg::*;
#(
  parameter int unsigned NUM_PIPES = 4,
  parameter int unsigned NUM_COMM  = 8,
  parameter int unsigned AGG_BEATS = 256,
  parameter int unsigned NUM_SPU   = 3,
  parameter int unsigned CT_DEPTH  = 64,
  parameter int unsigned Q_DEPTH   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // payload from the ingress parser, and from recirculation
  input  logic        pl_in_valid,
  output logic        pl_in_ready,
  input  beat_t       pl_in_beat,
  input  logic        rc_in_valid,
  output logic        rc_in_ready,
  input  beat_t       rc_in_beat,
  // headers around the accelerator
  input  logic        hdr_in_valid,
  output logic        hdr_in_ready,
  input  beat_t       hdr_in_beat,
  output logic        hdr_out_valid,
  input  logic        hdr_out_ready,
  output beat_t       hdr_out_beat,
  // contributions from the other pipes into the aggregation unit
  input  logic   [NUM_PIPES-2:0] op_in_valid,
  output logic   [NUM_PIPES-2:0] op_in_ready,
  input  mbeat_t                 op_in_data [NUM_PIPES-1],
  // payload out of this pipe, and multicast copies to the other pipes
  output logic        pl_out_valid,
  input  logic        pl_out_ready,
  output beat_t       pl_out_beat,
  output logic   [NUM_PIPES-1:1] mc_out_valid,
  input  logic   [NUM_PIPES-1:1] mc_out_ready,
  output beat_t                  mc_out_beat,
  // AXI-Lite control
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // off-chip memory: instruction read master and per-SPU data masters
  output logic        il_rd_req_valid,
  input  logic        il_rd_req_ready,
  output addr_t       il_rd_req_addr,
  input  logic        il_rd_rsp_valid,
  input  vec_t        il_rd_rsp_data,
  output logic    [NUM_SPU-1:0] rd_req_valid,
  input  logic    [NUM_SPU-1:0] rd_req_ready,
  output addr_t                 rd_req_addr [NUM_SPU],
  input  logic    [NUM_SPU-1:0] rd_rsp_valid,
  input  vec_t                  rd_rsp_data [NUM_SPU],
  output logic    [NUM_SPU-1:0] wr_req_valid,
  input  logic    [NUM_SPU-1:0] wr_req_ready,
  output wr_req_t               wr_req      [NUM_SPU],
  input  logic    [NUM_SPU-1:0] wr_ack,
  // event strobes
  output logic        ev_recirc,     // a recirculated packet entered
  output logic        ev_bypass,     // a packet took the payload bypass
  output logic        ev_other_pipe, // a contribution from another pipe entered
  output logic        ev_reduce,     // a reduction completed
  output logic        ev_gather,     // a gather completed
  output logic        ev_cgra,       // a packet left the CGRA
  output logic        ev_multicast,  // a beat was copied to several pipes
  output logic        ev_mem,        // an SPU load/store completed
  output logic        ev_stall       // input offered but held off
);
  // ---------------- input merge: ingress payload + recirculation ----------
  logic [1:0] ai_valid, ai_ready, ai_last;
  beat_t      ai_data [2];
  logic       pin_valid, pin_ready, pin_last;
  beat_t      pin_beat;

  assign ai_valid   = {rc_in_valid, pl_in_valid};
  assign ai_data[0] = pl_in_beat;
  assign ai_data[1] = rc_in_beat;
  assign ai_last    = {rc_in_beat.last, pl_in_beat.last};
  assign {rc_in_ready, pl_in_ready} = ai_ready;

  pkt_arbiter #(.T(beat_t), .N(2)) u_in_mux (
    .clk, .rst_n, .in_valid(ai_valid), .in_ready(ai_ready), .in_data(ai_data),
    .in_last(ai_last), .out_valid(pin_valid), .out_ready(pin_ready),
    .out_data(pin_beat), .out_last(pin_last)
  );

  logic rc_sop_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rc_sop_q <= 1'b1;
    else if (rc_in_valid && rc_in_ready) rc_sop_q <= rc_in_beat.last;
  end
  assign ev_recirc = rc_in_valid && rc_in_ready && rc_sop_q;
  assign ev_stall  = (pl_in_valid && !pl_in_ready) || (|(op_in_valid & ~op_in_ready));

  // ---------------- payload parser ----------------
  logic  pa_valid, pa_ready, byp_valid, byp_ready;
  meta_t pa_meta;
  beat_t pa_beat, byp_beat;

  payload_parser u_parser (
    .clk, .rst_n, .in_valid(pin_valid), .in_ready(pin_ready), .in_beat(pin_beat),
    .acis_valid(pa_valid), .acis_ready(pa_ready), .acis_meta(pa_meta), .acis_beat(pa_beat),
    .byp_valid, .byp_ready, .byp_beat
  );

  // ---------------- payload bypass queue ----------------
  logic  bq_valid, bq_ready;
  beat_t bq_beat;
  logic  byp_sop_q;

  sync_fifo #(.T(beat_t), .DEPTH(Q_DEPTH)) u_payload_queue (
    .clk, .rst_n, .in_valid(byp_valid), .in_ready(byp_ready), .in_data(byp_beat),
    .out_valid(bq_valid), .out_ready(bq_ready), .out_data(bq_beat), .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) byp_sop_q <= 1'b1;
    else if (byp_valid && byp_ready) byp_sop_q <= byp_beat.last;
  end
  assign ev_bypass = byp_valid && byp_ready && byp_sop_q;

  // ---------------- header bypass queue ----------------
  sync_fifo #(.T(beat_t), .DEPTH(Q_DEPTH)) u_header_queue (
    .clk, .rst_n, .in_valid(hdr_in_valid), .in_ready(hdr_in_ready), .in_data(hdr_in_beat),
    .out_valid(hdr_out_valid), .out_ready(hdr_out_ready), .out_data(hdr_out_beat), .count()
  );

  // ---------------- collective control plugin ----------------
  logic                        cfg_we;
  logic [$clog2(NUM_COMM)-1:0] cfg_idx;
  ctl_t                        cfg_entry;
  logic   cc_valid, cc_ready;
  mbeat_t cc_data;

  collective_ctrl #(.NUM_COMM(NUM_COMM)) u_ccp (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_entry,
    .in_valid(pa_valid), .in_ready(pa_ready), .in_meta(pa_meta), .in_beat(pa_beat),
    .out_valid(cc_valid), .out_ready(cc_ready), .out_data(cc_data)
  );

  // ---------------- merge with the other pipes ----------------
  logic [NUM_PIPES-1:0] am_valid, am_ready, am_last;
  mbeat_t               am_data [NUM_PIPES];
  logic   ag_in_valid, ag_in_ready, ag_in_last;
  mbeat_t ag_in_data;

  always_comb begin
    am_valid[0] = cc_valid;
    am_data[0]  = cc_data;
    am_last[0]  = cc_data.beat.last;
    for (int p = 1; p < NUM_PIPES; p++) begin
      am_valid[p] = op_in_valid[p-1];
      am_data[p]  = op_in_data[p-1];
      am_last[p]  = op_in_data[p-1].beat.last;
    end
  end
  assign cc_ready    = am_ready[0];
  assign op_in_ready = am_ready[NUM_PIPES-1:1];

  pkt_arbiter #(.T(mbeat_t), .N(NUM_PIPES)) u_pipe_mux (
    .clk, .rst_n, .in_valid(am_valid), .in_ready(am_ready), .in_data(am_data),
    .in_last(am_last), .out_valid(ag_in_valid), .out_ready(ag_in_ready),
    .out_data(ag_in_data), .out_last(ag_in_last)
  );

  logic [NUM_PIPES-2:0] op_sop_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) op_sop_q <= '1;
    else for (int p = 0; p < NUM_PIPES - 1; p++)
      if (op_in_valid[p] && op_in_ready[p]) op_sop_q[p] <= op_in_data[p].beat.last;
  end
  assign ev_other_pipe = |(op_in_valid & op_in_ready & op_sop_q);

  // ---------------- aggregation unit ----------------
  logic   ag_out_valid, ag_out_ready;
  mbeat_t ag_out_data;

  aggregation_unit #(.NUM_COMM(NUM_COMM), .AGG_BEATS(AGG_BEATS)) u_agg (
    .clk, .rst_n, .in_valid(ag_in_valid), .in_ready(ag_in_ready), .in_data(ag_in_data),
    .out_valid(ag_out_valid), .out_ready(ag_out_ready), .out_data(ag_out_data),
    .ev_reduce_done(ev_reduce), .ev_gather_done(ev_gather)
  );

  // ---------------- CGRA (taken when the communicator enables it) --------
  logic   to_cgra;
  logic   cg_in_ready, cg_out_valid, cg_out_ready;
  mbeat_t cg_out_data;
  logic   dp_in_valid, dp_in_ready, dp_in_last;
  mbeat_t dp_in_data;
  logic [1:0] dm_valid, dm_ready, dm_last;
  mbeat_t     dm_data [2];

  assign to_cgra      = ag_out_data.ctl.hit && ag_out_data.ctl.cgra_en;
  assign ag_out_ready = to_cgra ? cg_in_ready : dm_ready[1];

  cgra #(.NUM_SPU(NUM_SPU), .CT_DEPTH(CT_DEPTH), .OUT_DEPTH(AGG_BEATS),
         .NUM_COMM(NUM_COMM)) u_cgra (
    .clk, .rst_n,
    .in_valid(ag_out_valid && to_cgra), .in_ready(cg_in_ready), .in_data(ag_out_data),
    .out_valid(cg_out_valid), .out_ready(cg_out_ready), .out_data(cg_out_data),
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .cfg_we, .cfg_idx, .cfg_entry,
    .il_rd_req_valid, .il_rd_req_ready, .il_rd_req_addr, .il_rd_rsp_valid, .il_rd_rsp_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_req_valid, .wr_req_ready, .wr_req, .wr_ack,
    .spu_busy(), .ev_mem
  );
  assign ev_cgra = cg_out_valid && cg_out_ready && cg_out_data.beat.last;

  assign dm_valid   = {ag_out_valid && !to_cgra, cg_out_valid};
  assign dm_data[0] = cg_out_data;
  assign dm_data[1] = ag_out_data;
  assign dm_last    = {ag_out_data.beat.last, cg_out_data.beat.last};
  assign cg_out_ready = dm_ready[0];

  pkt_arbiter #(.T(mbeat_t), .N(2)) u_dep_mux (
    .clk, .rst_n, .in_valid(dm_valid), .in_ready(dm_ready), .in_data(dm_data),
    .in_last(dm_last), .out_valid(dp_in_valid), .out_ready(dp_in_ready),
    .out_data(dp_in_data), .out_last(dp_in_last)
  );

  // ---------------- deparser and multicast engine ----------------
  logic    me_in_valid, me_in_ready;
  mcbeat_t me_in_data;
  logic [NUM_PIPES-1:0] me_out_valid, me_out_ready;
  beat_t   me_beat;

  payload_deparser u_deparser (
    .clk, .rst_n, .in_valid(dp_in_valid), .in_ready(dp_in_ready), .in_data(dp_in_data),
    .out_valid(me_in_valid), .out_ready(me_in_ready), .out_data(me_in_data)
  );

  multicast_engine #(.NUM_PIPES(NUM_PIPES)) u_me (
    .clk, .rst_n, .in_valid(me_in_valid), .in_ready(me_in_ready), .in_data(me_in_data),
    .out_valid(me_out_valid), .out_ready(me_out_ready), .out_beat(me_beat),
    .ev_multi(ev_multicast)
  );

  assign mc_out_valid = me_out_valid[NUM_PIPES-1:1];
  assign mc_out_beat  = me_beat;
  assign me_out_ready[NUM_PIPES-1:1] = mc_out_ready;

  // ---------------- output merge: ACiS results + payload bypass ----------
  logic [1:0] om_valid, om_ready, om_last;
  beat_t      om_data [2];
  logic       unused_last;

  assign om_valid   = {bq_valid, me_out_valid[0]};
  assign om_data[0] = me_beat;
  assign om_data[1] = bq_beat;
  assign om_last    = {bq_beat.last, me_beat.last};
  assign {bq_ready, me_out_ready[0]} = om_ready;

  pkt_arbiter #(.T(beat_t), .N(2)) u_out_mux (
    .clk, .rst_n, .in_valid(om_valid), .in_ready(om_ready), .in_data(om_data),
    .in_last(om_last), .out_valid(pl_out_valid), .out_ready(pl_out_ready),
    .out_data(pl_out_beat), .out_last(unused_last)
  );
endmodule
