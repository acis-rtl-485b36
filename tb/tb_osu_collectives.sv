// tb_osu_collectives: the collectives of the OSU micro-benchmarks (allreduce,
// gather, allgather, broadcast) run through one ACiS switch pipe at its
// default sizes, over a range of message sizes.
//
// Four group members: rank 0 on this pipe's ingress, ranks 1..3 on the inputs
// from the other pipes. Sizes per member, in 12-byte beats: allreduce 1, 4,
// 118 (a 1408-byte packet) and 256 (the whole aggregation slot) with every
// reduction operator and both integer types; gather and allgather 1, 4 and 64
// (4 x 64 = the whole slot); broadcast 1, 118 and three back-to-back 118-beat
// packets of one longer message. Gather results go to pipe 0 (the root),
// allgather, allreduce and broadcast results to all four pipes. Each result
// packet, header included, is compared with a model computed here. Local
// contributions are sent after the other pipes' ones, so the result header
// carries rank 0's fields.
module tb_osu_collectives;
  import acis_pkg::*;
  import spu_asm_pkg::*;
  localparam int NP = 4, NUM_SPU = 3;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pl_in_valid = 0, pl_in_ready, rc_in_valid = 0, rc_in_ready;
  beat_t pl_in_beat = '0, rc_in_beat = '0;
  logic hdr_in_valid = 0, hdr_in_ready, hdr_out_valid, hdr_out_ready = 1;
  beat_t hdr_in_beat = '0, hdr_out_beat;
  logic [NP-2:0] op_in_valid = '0, op_in_ready;
  mbeat_t op_in_data [NP-1];
  logic pl_out_valid, pl_out_ready = 1;
  beat_t pl_out_beat, mc_out_beat;
  logic [NP-1:1] mc_out_valid, mc_out_ready = '1;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic il_rd_req_valid, il_rd_req_ready, il_rd_rsp_valid;
  addr_t il_rd_req_addr;
  vec_t il_rd_rsp_data;
  logic [NUM_SPU-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid;
  addr_t rd_req_addr [NUM_SPU];
  vec_t rd_rsp_data [NUM_SPU];
  logic [NUM_SPU-1:0] wr_req_valid, wr_req_ready, wr_ack;
  wr_req_t wr_req [NUM_SPU];
  logic ev_recirc, ev_bypass, ev_other_pipe, ev_reduce, ev_gather, ev_cgra, ev_multicast,
        ev_mem, ev_stall;

  acis_top dut (.*);

  logic il_wr_ready, il_wr_ack;
  hbm_model #(.DEPTH(64), .LATENCY(4)) u_imem (.clk, .rd_req_valid(il_rd_req_valid),
    .rd_req_ready(il_rd_req_ready), .rd_req_addr(il_rd_req_addr), .rd_rsp_valid(il_rd_rsp_valid),
    .rd_rsp_data(il_rd_rsp_data), .wr_req_valid(1'b0), .wr_req_ready(il_wr_ready), .wr_req('0),
    .wr_ack(il_wr_ack));
  for (genvar s = 0; s < NUM_SPU; s++) begin : g_mem
    hbm_model #(.DEPTH(256), .LATENCY(4)) u_bank (.clk, .rd_req_valid(rd_req_valid[s]),
      .rd_req_ready(rd_req_ready[s]), .rd_req_addr(rd_req_addr[s]), .rd_rsp_valid(rd_rsp_valid[s]),
      .rd_rsp_data(rd_rsp_data[s]), .wr_req_valid(wr_req_valid[s]), .wr_req_ready(wr_req_ready[s]),
      .wr_req(wr_req[s]), .wr_ack(wr_ack[s]));
  end

  axi_lite_master u_axi (.clk, .awvalid(s_awvalid), .awready(s_awready), .awaddr(s_awaddr),
    .wvalid(s_wvalid), .wready(s_wready), .wdata(s_wdata), .bvalid(s_bvalid), .bready(s_bready),
    .arvalid(s_arvalid), .arready(s_arready), .araddr(s_araddr), .rvalid(s_rvalid),
    .rready(s_rready), .rdata(s_rdata));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- event counters ----------------
  int n_recirc = 0, n_bypass = 0, n_other = 0, n_reduce = 0, n_gather = 0, n_cgra = 0,
      n_multi = 0, n_mem = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    n_recirc += int'(ev_recirc);   n_bypass += int'(ev_bypass); n_other += int'(ev_other_pipe);
    n_reduce += int'(ev_reduce);   n_gather += int'(ev_gather); n_cgra  += int'(ev_cgra);
    n_multi  += int'(ev_multicast); n_mem   += int'(ev_mem);    n_stall += int'(ev_stall);
  end

  // ---------------- output capture ----------------
  vec_t pipe_q [NP][$];     // data words of every beat per output pipe
  bit   plast_q [NP][$];
  always @(posedge clk) if (rst_n) begin
    if (pl_out_valid && pl_out_ready) begin
      pipe_q[0].push_back(pl_out_beat.data); plast_q[0].push_back(pl_out_beat.last);
    end
    for (int p = 1; p < NP; p++) if (mc_out_valid[p] && mc_out_ready[p]) begin
      pipe_q[p].push_back(mc_out_beat.data); plast_q[p].push_back(mc_out_beat.last);
    end
  end
  beat_t hdr_seen [$];
  always @(posedge clk) if (rst_n && hdr_out_valid && hdr_out_ready) hdr_seen.push_back(hdr_out_beat);

  // Expected packets per pipe (header + data), order within a pipe not fixed
  // for pipe 0 (bypass traffic may overtake), fixed otherwise.
  typedef vec_t pkt_t [$];
  pkt_t exp_pkts [NP][$];

  // ---------------- stimulus helpers ----------------
  function automatic meta_t mk(int comm, coll_e coll, int rank, int n);
    return '{comm_id: 8'(comm), coll: coll, op: OP_SUM, dtype: DT_INT32, src_rank: 16'(rank),
             tag: 16'(100 + comm), nbeats: 16'(n), dst_rank: 16'd0};
  endfunction

  function automatic meta_t mko(int comm, coll_e coll, redop_e op, dtype_e dt, int rank, int n);
    meta_t m;
    m = mk(comm, coll, rank, n);
    m.op = op; m.dtype = dt;
    return m;
  endfunction

  task automatic send_switch(bit recirc, meta_t m, bit acis, vec_t d [$]);
    vec_t h;
    h = pack_header(m);
    h[0][0] = acis;
    for (int b = -1; b < d.size(); b++) begin
      beat_t bt;
      bt = (b < 0) ? '{data: h, last: 1'b0} : '{data: d[b], last: b == d.size() - 1};
      @(negedge clk);
      if (recirc) begin rc_in_valid = 1; rc_in_beat = bt; end
      else begin pl_in_valid = 1; pl_in_beat = bt; end
      @(posedge clk);
      while (!(recirc ? rc_in_ready : pl_in_ready)) @(posedge clk);
    end
    @(negedge clk);
    if (recirc) rc_in_valid = 0; else pl_in_valid = 0;
  endtask

  task automatic send_pipe(int p, meta_t m, ctl_t c, vec_t d [$]);
    for (int b = 0; b < d.size(); b++) begin
      @(negedge clk);
      op_in_valid[p] = 1;
      op_in_data[p] = '{meta: m, ctl: c, beat: '{data: d[b], last: b == d.size() - 1}};
      @(posedge clk);
      while (!op_in_ready[p]) @(posedge clk);
    end
    @(negedge clk); op_in_valid[p] = 0;
  endtask

  function automatic pkt_t rnd_pkt(int n);
    pkt_t d;
    for (int b = 0; b < n; b++) d.push_back({32'($urandom_range(0, 999)), 32'($urandom),
                                             32'($urandom_range(0, 999))});
    return d;
  endfunction

  // Find an expected packet at the head of a pipe's capture and remove both.
  task automatic match_pipe(int p, bit any_order);
    while (exp_pkts[p].size() > 0) begin
      int hit;
      hit = -1;
      for (int k = 0; k < (any_order ? exp_pkts[p].size() : 1); k++) begin
        if (hit < 0 && pipe_q[p].size() >= exp_pkts[p][k].size()) begin
          bit ok;
          ok = 1;
          for (int b = 0; b < exp_pkts[p][k].size(); b++)
            if (pipe_q[p][b] != exp_pkts[p][k][b] || plast_q[p][b] != (b == exp_pkts[p][k].size() - 1))
              ok = 0;
          if (ok) hit = k;
        end
      end
      check(hit >= 0, $sformatf("pipe %0d: next output packet matches an expected one", p));
      if (hit < 0) return;
      for (int b = 0; b < exp_pkts[p][hit].size(); b++) begin
        void'(pipe_q[p].pop_front()); void'(plast_q[p].pop_front());
      end
      exp_pkts[p].delete(hit);
    end
    check(pipe_q[p].size() == 0, $sformatf("pipe %0d: no extra output", p));
  endtask

  // ---------------- test ----------------
  function automatic word_t red(redop_e op, dtype_e dt, word_t a, word_t b);
    case (op)
      OP_SUM:  return a + b;
      OP_PROD: return a * b;
      OP_MAX:  return (dt == DT_INT32) ? (($signed(a) > $signed(b)) ? a : b) : ((a > b) ? a : b);
      OP_MIN:  return (dt == DT_INT32) ? (($signed(a) < $signed(b)) ? a : b) : ((a < b) ? a : b);
      OP_BAND: return a & b;
      OP_BOR:  return a | b;
      default: return a ^ b;
    endcase
  endfunction

  function automatic pkt_t rnd_signed(int n);
    pkt_t d;
    for (int b = 0; b < n; b++) d.push_back({$urandom, 32'($urandom_range(0, 50)) - 32'd25, $urandom});
    return d;
  endfunction

  int n_runs = 0;

  // One collective: contributions of ranks 1..3 from the other pipes, then rank 0.
  task automatic run_coll(int comm, coll_e coll, redop_e op, dtype_e dt, int n, logic [7:0] mask);
    pkt_t d [NP], res;
    ctl_t c;
    c = '{hit: 1'b1, group_size: 16'(NP), cgra_en: 1'b0, mcast_mask: mask};
    for (int r = 0; r < NP; r++) d[r] = rnd_signed(n);
    res = {};
    if (coll == COLL_REDUCE) begin
      for (int b = 0; b < n; b++) begin
        vec_t s;
        s = d[0][b];
        for (int r = 1; r < NP; r++) for (int l = 0; l < LANES; l++) s[l] = red(op, dt, s[l], d[r][b][l]);
        res.push_back(s);
      end
      res.push_front(pack_header(mko(comm, coll, op, dt, 0, n)));
    end else begin
      for (int r = 0; r < NP; r++) for (int b = 0; b < n; b++) res.push_back(d[r][b]);
      res.push_front(pack_header(mko(comm, coll, op, dt, 0, NP * n)));
    end
    fork
      send_pipe(0, mko(comm, coll, op, dt, 1, n), c, d[1]);
      send_pipe(1, mko(comm, coll, op, dt, 2, n), c, d[2]);
      send_pipe(2, mko(comm, coll, op, dt, 3, n), c, d[3]);
    join
    repeat (10) @(posedge clk);
    send_switch(0, mko(comm, coll, op, dt, 0, n), 1, d[0]);
    repeat (NP * n + 60) @(posedge clk);
    for (int p = 0; p < NP; p++) if (mask[p]) exp_pkts[p].push_back(res);
    for (int p = 0; p < NP; p++) match_pipe(p, 0);
    n_runs++;
  endtask

  task automatic run_bcast(int comm, int n, int npkt);
    for (int k = 0; k < npkt; k++) begin
      pkt_t d;
      meta_t m;
      d = rnd_pkt(n);
      m = mko(comm, COLL_PASS, OP_SUM, DT_INT32, 0, n);
      m.tag = 16'(k);
      send_switch(0, m, 1, d);
      d.push_front(pack_header(m));
      for (int p = 0; p < NP; p++) exp_pkts[p].push_back(d);
    end
    repeat (n + 60) @(posedge clk);
    for (int p = 0; p < NP; p++) match_pipe(p, 0);
    n_runs++;
  endtask

  initial begin
    int sz [4];
    for (int p = 0; p < NP - 1; p++) op_in_data[p] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // communicator table: 1 allreduce, 2 gather (root on pipe 0), 3 allgather, 4 bcast
    u_axi.write(8'h40, 32'h0002_0004); u_axi.write(8'h44, 32'h0F); u_axi.write(8'h48, 32'd1);
    u_axi.write(8'h40, 32'h0002_0004); u_axi.write(8'h44, 32'h01); u_axi.write(8'h48, 32'd2);
    u_axi.write(8'h40, 32'h0002_0004); u_axi.write(8'h44, 32'h0F); u_axi.write(8'h48, 32'd3);
    u_axi.write(8'h40, 32'h0002_0001); u_axi.write(8'h44, 32'h0F); u_axi.write(8'h48, 32'd4);

    // osu_allreduce
    sz = '{1, 4, 118, 256};
    for (int i = 0; i < 4; i++) run_coll(1, COLL_REDUCE, OP_SUM, DT_INT32, sz[i], 8'h0F);
    run_coll(1, COLL_REDUCE, OP_PROD, DT_INT32,  118, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_MAX,  DT_INT32,  118, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_MAX,  DT_UINT32, 118, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_MIN,  DT_INT32,  118, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_MIN,  DT_UINT32, 118, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_BAND, DT_UINT32, 4, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_BOR,  DT_UINT32, 4, 8'h0F);
    run_coll(1, COLL_REDUCE, OP_BXOR, DT_UINT32, 4, 8'h0F);
    // osu_gather and osu_allgather
    sz = '{1, 4, 64, 0};
    for (int i = 0; i < 3; i++) run_coll(2, COLL_GATHER, OP_SUM, DT_INT32, sz[i], 8'h01);
    for (int i = 0; i < 3; i++) run_coll(3, COLL_GATHER, OP_SUM, DT_INT32, sz[i], 8'h0F);
    // osu_bcast
    run_bcast(4, 1, 1);
    run_bcast(4, 118, 1);
    run_bcast(4, 118, 3);

    check(n_runs == 21, "all collectives ran");
    check(n_reduce == 12, "one reduction result per allreduce");
    check(n_gather == 6, "one gather result per gather / allgather");
    check(n_other == 54, "three other-pipe contributions per aggregated collective");
    check(n_bypass == 0, "nothing took the payload bypass");
    $display("events: reduce=%0d gather=%0d other=%0d multicast=%0d stall=%0d",
             n_reduce, n_gather, n_other, n_multi, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
