// tb_allgather_op_allgather: the fused collective Allgather_op_allgather with
// a prefix sum as the operation, as used in finite-element codes, run through
// one ACiS switch pipe at its default sizes.
//
// Two leaf nodes each send a 1408-byte message (352 int32 words, padded to
// 118 beats of three words) into a communicator of group size 2 with the CGRA
// enabled: leaf 0 arrives on this pipe's ingress, leaf 1 on the input from
// another pipe. The aggregation unit gathers the two messages in rank order
// (236 beats), SPU 0 of the CGRA computes the inclusive prefix sum over the
// whole gathered vector, and the multicast engine sends the result back to
// both leaves (pipes 0 and 1): the second allgather needs no further traffic.
// Three rounds run one after another with fresh data; each result, header
// included, is compared with a model computed here, and the cycles from the
// last input beat to the last result beat are printed.
module tb_allgather_op_allgather;
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
  localparam int WORDS = 352, N = (WORDS + LANES - 1) / LANES;

  function automatic pkt_t leaf_msg();
    pkt_t d;
    for (int b = 0; b < N; b++) begin
      vec_t v;
      for (int l = 0; l < LANES; l++) v[l] = (b * LANES + l < WORDS) ? 32'($urandom_range(0, 9999)) : '0;
      d.push_back(v);
    end
    return d;
  endfunction

  initial begin
    ctl_t c;
    pkt_t d [2], res;
    word_t run;
    longint t0, t1;
    for (int p = 0; p < NP - 1; p++) op_in_data[p] = '0;
    for (int i = 0; i < PSUM_LEN; i++) u_imem.mem[i / LANES][i % LANES] = psum_prog(i);
    repeat (3) @(posedge clk); rst_n = 1;
    c = '{hit: 1'b1, group_size: 16'd2, cgra_en: 1'b1, mcast_mask: 8'h03};
    u_axi.write(8'h40, 32'h0003_0002); u_axi.write(8'h44, 32'h03); u_axi.write(8'h48, 32'd6);
    u_axi.write(8'h10, 32'd0); u_axi.write(8'h14, 32'(PSUM_LEN));
    u_axi.write(8'h00, 32'd1);
    begin
      logic [31:0] st;
      st = 0;
      while (!st[1]) u_axi.read(8'h04, st);
    end

    for (int round = 0; round < 3; round++) begin
      d[0] = leaf_msg(); d[1] = leaf_msg();
      res = {};
      run = 0;
      for (int r = 0; r < 2; r++) for (int b = 0; b < N; b++) begin
        vec_t v;
        for (int l = 0; l < LANES; l++) begin run += d[r][b][l]; v[l] = run; end
        res.push_back(v);
      end
      res.push_front(pack_header(mk(6, COLL_GATHER, 0, 2 * N)));
      send_pipe(0, mk(6, COLL_GATHER, 1, N), c, d[1]);
      repeat (10) @(posedge clk);
      send_switch(0, mk(6, COLL_GATHER, 0, N), 1, d[0]);
      t0 = longint'($time);
      wait (pipe_q[1].size() == 2 * N + 1);
      t1 = longint'($time);
      $display("round %0d: last result beat %0d cycles after the last input beat", round,
               (t1 - t0) / 10);
      repeat (20) @(posedge clk);
      exp_pkts[0].push_back(res);
      exp_pkts[1].push_back(res);
      for (int p = 0; p < NP; p++) match_pipe(p, 0);
    end
    check(n_gather == 3, "three gathers completed");
    check(n_cgra == 3, "three packets through the CGRA");
    check(n_other == 3, "one contribution per round from the other pipe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
