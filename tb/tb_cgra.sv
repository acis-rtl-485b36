// tb_cgra: the CGRA with its instruction memory and three data banks modelled.
// Phase 1, no programs: packets pass unchanged with metadata intact. Phase 2:
// programs are placed in instruction memory and loaded over AXI-Lite: SPU0
// prefix sum, SPU1 double-store-reload, SPU2 empty (bypassed); each output
// packet must be 2x the running sum of its input and keep its length and
// metadata. Phase 3: SPU2 gets the dot-product program, so every packet must
// shrink to one beat holding the sum of squares of the phase-2 result, with
// nbeats set to 1 by the assembler. Input and output stall at random.
module tb_cgra;
  import acis_pkg::*;
  import spu_asm_pkg::*;
  localparam int NUM_SPU = 3, CT_DEPTH = 64, NUM_COMM = 8;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  mbeat_t in_data = '0, out_data;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic cfg_we;
  logic [2:0] cfg_idx;
  ctl_t cfg_entry;
  logic il_rd_req_valid, il_rd_req_ready, il_rd_rsp_valid;
  addr_t il_rd_req_addr;
  vec_t il_rd_rsp_data;
  logic [NUM_SPU-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid;
  addr_t rd_req_addr [NUM_SPU];
  vec_t rd_rsp_data [NUM_SPU];
  logic [NUM_SPU-1:0] wr_req_valid, wr_req_ready, wr_ack, spu_busy;
  wr_req_t wr_req [NUM_SPU];
  logic ev_mem;

  cgra #(.NUM_SPU(NUM_SPU), .CT_DEPTH(CT_DEPTH), .OUT_DEPTH(32), .NUM_COMM(NUM_COMM)) dut (.*);

  logic il_wr_ready, il_wr_ack;
  hbm_model #(.DEPTH(64), .LATENCY(3)) u_imem (.clk, .rd_req_valid(il_rd_req_valid),
    .rd_req_ready(il_rd_req_ready), .rd_req_addr(il_rd_req_addr), .rd_rsp_valid(il_rd_rsp_valid),
    .rd_rsp_data(il_rd_rsp_data), .wr_req_valid(1'b0), .wr_req_ready(il_wr_ready), .wr_req('0),
    .wr_ack(il_wr_ack));
  for (genvar s = 0; s < NUM_SPU; s++) begin : g_mem
    hbm_model #(.DEPTH(64), .LATENCY(3)) u_bank (.clk, .rd_req_valid(rd_req_valid[s]),
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
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { meta_t m; vec_t d [$]; } pkt_t;
  pkt_t exp_q [$];
  int   mode = 0;   // 0 unchanged, 1 2x prefix sum, 2 dot of 2x prefix sum

  task automatic send(int tag, int n);
    meta_t m;
    vec_t  d [$];
    pkt_t  e;
    word_t run, dot;
    m = '{comm_id: 8'(tag % NUM_COMM), coll: COLL_REDUCE, op: OP_SUM, dtype: DT_INT32,
          src_rank: 16'(tag), tag: 16'(tag), nbeats: 16'(n), dst_rank: 16'd1};
    run = 0; dot = 0;
    e.m = m;
    for (int b = 0; b < n; b++) begin
      vec_t v, o;
      for (int l = 0; l < LANES; l++) begin
        v[l] = $urandom_range(0, 500);
        run += v[l];
        o[l] = (mode == 0) ? v[l] : 2 * run;
        dot += o[l] * o[l];
      end
      d.push_back(v);
      if (mode != 2) e.d.push_back(o);
    end
    if (mode == 2) begin e.d.push_back({dot, dot, dot}); e.m.nbeats = 16'd1; end
    exp_q.push_back(e);
    for (int b = 0; b < n; b++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_data = '{meta: m, ctl: '{hit: 1'b1, group_size: 16'd2, cgra_en: 1'b1, mcast_mask: 8'h1},
                  beat: '{data: d[b], last: b == n - 1}};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  int ob = 0, npk = 0;
  always @(negedge clk) out_ready <= $urandom_range(0, 3) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected beat"); end
    else begin
      if (out_data.beat.data != exp_q[0].d[ob] || out_data.meta != exp_q[0].m ||
          out_data.beat.last != (ob == exp_q[0].d.size() - 1)) begin
        failures++;
        $display("FAIL packet %0d beat %0d got %h exp %h nbeats %0d", npk, ob, out_data.beat.data,
                 exp_q[0].d[ob], out_data.meta.nbeats);
      end
      if (out_data.beat.last) begin void'(exp_q.pop_front()); ob = 0; npk++; end else ob++;
    end
  end

  task automatic drain();
    int t;
    t = 0;
    while (exp_q.size() > 0 && t < 20000) begin @(posedge clk); t++; end
    check(exp_q.size() == 0, $sformatf("all packets of mode %0d out", mode));
  endtask

  task automatic load(int l0, int l1, int l2);
    logic [31:0] st;
    u_axi.write(8'h10, 32'd0);  u_axi.write(8'h14, 32'(l0));
    u_axi.write(8'h18, 32'd10); u_axi.write(8'h1C, 32'(l1));
    u_axi.write(8'h20, 32'd20); u_axi.write(8'h24, 32'(l2));
    u_axi.write(8'h00, 32'd1);
    st = 0;
    while (!st[1]) u_axi.read(8'h04, st);
  endtask

  int nmem = 0;
  always @(posedge clk) if (ev_mem) nmem++;

  initial begin
    // programs in instruction memory: SPU0 at beat 0, SPU1 at 10, SPU2 at 20
    for (int i = 0; i < 30; i++) begin
      u_imem.mem[i / LANES][i % LANES]      = psum_prog(i);
      u_imem.mem[10 + i / LANES][i % LANES] = store_prog(i);
      u_imem.mem[20 + i / LANES][i % LANES] = dot_prog(i);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    mode = 0;
    for (int p = 0; p < 4; p++) send(p, 1 + p);
    drain();
    load(PSUM_LEN, STORE_LEN, 0);
    mode = 1;
    for (int p = 0; p < 4; p++) send(10 + p, 2 + 2 * p);
    drain();
    check(nmem == 2 * (2 + 4 + 6 + 8), $sformatf("memory operations %0d", nmem));
    load(PSUM_LEN, STORE_LEN, DOT_LEN);
    mode = 2;
    for (int p = 0; p < 3; p++) send(20 + p, 3 + p);
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
