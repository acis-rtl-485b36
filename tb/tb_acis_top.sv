// tb_acis_top: end-to-end test of one ACiS switch pipe at its default sizes.
// The control plane (AXI-Lite) writes three communicators and loads SPU
// programs; then, with memory banks modelled:
//  * allreduce (int32 sum, 4 members, 117-beat / 1404-byte contributions):
//    one contribution from this pipe's ingress, three from the other pipes;
//    the result must reach all four pipes (multicast);
//  * allgather-op (4 members x 64 beats, the full 256-beat buffer): this
//    pipe's contribution enters through the recirculation port, the others
//    arrive from other pipes in shuffled rank order; the gathered vector runs
//    through the CGRA (SPU0 prefix sum, SPU1 doubling through its memory bank)
//    and goes to pipes 0 and 1;
//  * a packet not marked for ACiS (payload bypass queue) and one for a
//    communicator without a table entry (forwarded with its header rebuilt);
//  * headers through the header bypass queue;
//  * output back-pressure while traffic arrives.
// Every output packet is compared with a result computed here. Each mechanism
// (recirculation, bypass, other-pipe input, reduce, gather, CGRA, multicast,
// SPU memory access, input stall) is counted and must occur at least once.
module tb_acis_top;
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
  localparam int AR_N = 117, AG_N = 64;
  initial begin
    ctl_t c_ar, c_ag;
    pkt_t ar [NP], ag [NP], res, byp, miss;
    meta_t m;
    vec_t h;
    word_t run;
    int order [3];

    for (int p = 0; p < NP - 1; p++) op_in_data[p] = '0;
    for (int i = 0; i < 30; i++) begin
      u_imem.mem[i / LANES][i % LANES]      = psum_prog(i);
      u_imem.mem[10 + i / LANES][i % LANES] = store_prog(i);
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // control plane: comm 1 allreduce to all pipes, comm 2 allgather-op to pipes 0,1
    c_ar = '{hit: 1'b1, group_size: 16'd4, cgra_en: 1'b0, mcast_mask: 8'h0F};
    c_ag = '{hit: 1'b1, group_size: 16'd4, cgra_en: 1'b1, mcast_mask: 8'h03};
    u_axi.write(8'h40, 32'h0002_0004); u_axi.write(8'h44, 32'h0F); u_axi.write(8'h48, 32'd1);
    u_axi.write(8'h40, 32'h0003_0004); u_axi.write(8'h44, 32'h03); u_axi.write(8'h48, 32'd2);
    u_axi.write(8'h10, 32'd0);  u_axi.write(8'h14, 32'(PSUM_LEN));
    u_axi.write(8'h18, 32'd10); u_axi.write(8'h1C, 32'(STORE_LEN));
    u_axi.write(8'h00, 32'd1);
    begin
      logic [31:0] st;
      st = 0;
      while (!st[1]) u_axi.read(8'h04, st);
    end

    // ---- allreduce ----
    for (int r = 0; r < NP; r++) ar[r] = rnd_pkt(AR_N);
    res = {};
    for (int b = 0; b < AR_N; b++) begin
      vec_t s;
      s = '0;
      for (int r = 0; r < NP; r++) for (int l = 0; l < LANES; l++) s[l] += ar[r][b][l];
      res.push_back(s);
    end
    m = mk(1, COLL_REDUCE, 0, AR_N);
    res.push_front(pack_header(m));     // result header: fields of the last contributor
    // outputs back-pressured while contributions arrive
    pl_out_ready = 0;
    fork
      send_switch(0, mk(1, COLL_REDUCE, 0, AR_N), 1, ar[0]);
      send_pipe(0, mk(1, COLL_REDUCE, 1, AR_N), c_ar, ar[1]);
      send_pipe(1, mk(1, COLL_REDUCE, 2, AR_N), c_ar, ar[2]);
      send_pipe(2, mk(1, COLL_REDUCE, 3, AR_N), c_ar, ar[3]);
      begin repeat (300) @(negedge clk); pl_out_ready = 1; end
    join
    // the result header carries the metadata of whichever contribution came last
    repeat (400) @(posedge clk);
    begin
      meta_t got;
      got = unpack_header(pipe_q[0][0]);
      h = pack_header(mk(1, COLL_REDUCE, int'(got.src_rank), AR_N));
      res[0] = h;
    end
    for (int p = 0; p < NP; p++) exp_pkts[p].push_back(res);

    // ---- allgather-op: prefix sum (x2 by SPU1) over the gathered vector ----
    for (int r = 0; r < NP; r++) ag[r] = rnd_pkt(AG_N);
    res = {};
    run = 0;
    for (int r = 0; r < NP; r++) for (int b = 0; b < AG_N; b++) begin
      vec_t v;
      for (int l = 0; l < LANES; l++) begin run += ag[r][b][l]; v[l] = 2 * run; end
      res.push_back(v);
    end
    order = '{3, 1, 2};
    fork
      send_switch(1, mk(2, COLL_GATHER, 0, AG_N), 1, ag[0]);
      send_pipe(0, mk(2, COLL_GATHER, order[0], AG_N), c_ag, ag[order[0]]);
      begin repeat (40) @(negedge clk);
        send_pipe(1, mk(2, COLL_GATHER, order[1], AG_N), c_ag, ag[order[1]]); end
      begin repeat (80) @(negedge clk);
        send_pipe(2, mk(2, COLL_GATHER, order[2], AG_N), c_ag, ag[order[2]]); end
    join

    // ---- payload bypass, table miss, headers ----
    byp = rnd_pkt(5);
    m = mk(3, COLL_PASS, 9, 5);
    h = pack_header(m); h[0][0] = 1'b0;
    send_switch(0, m, 0, byp);
    byp.push_front(h);
    exp_pkts[0].push_back(byp);
    miss = rnd_pkt(3);
    m = mk(5, COLL_REDUCE, 4, 3);
    send_switch(0, m, 1, miss);
    miss.push_front(pack_header(m));
    exp_pkts[0].push_back(miss);
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); hdr_in_valid = 1; hdr_in_beat = '{data: {32'(i), 32'(i * 7), 32'(i * 9)}, last: 1'b1};
      @(posedge clk); while (!hdr_in_ready) @(posedge clk);
    end
    @(negedge clk); hdr_in_valid = 0;

    repeat (3000) @(posedge clk);
    // gather result header: metadata of the last gather contribution
    begin
      pkt_t gr;
      int k;
      gr = res;
      k = -1;
      // locate the gather result in pipe 1 after the allreduce result
      if (pipe_q[1].size() > AR_N + 1) begin
        meta_t got;
        got = unpack_header(pipe_q[1][AR_N + 1]);
        m = mk(2, COLL_GATHER, int'(got.src_rank), NP * AG_N);
        check(got.nbeats == 16'(NP * AG_N) && got.comm_id == 8'd2, "gather result header");
      end
      gr.push_front(pack_header(m));
      exp_pkts[0].push_back(gr);
      exp_pkts[1].push_back(gr);
    end
    match_pipe(0, 1);
    for (int p = 1; p < NP; p++) match_pipe(p, 0);
    check(hdr_seen.size() == 6, "headers through the header bypass queue");
    for (int i = 0; i < hdr_seen.size(); i++)
      check(hdr_seen[i].data == {32'(i), 32'(i * 7), 32'(i * 9)}, "header order");

    check(n_recirc > 0, "recirculation used");
    check(n_bypass > 0, "payload bypass used");
    check(n_other > 0, "other-pipe input used");
    check(n_reduce > 0, "reduction completed");
    check(n_gather > 0, "gather completed");
    check(n_cgra > 0, "CGRA processed a packet");
    check(n_multi > 0, "multicast happened");
    check(n_mem > 0, "SPU memory access happened");
    check(n_stall > 0, "input stall happened");
    $display("events: recirc=%0d bypass=%0d other=%0d reduce=%0d gather=%0d cgra=%0d multicast=%0d mem=%0d stall=%0d",
             n_recirc, n_bypass, n_other, n_reduce, n_gather, n_cgra, n_multi, n_mem, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
