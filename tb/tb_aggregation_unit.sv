// tb_aggregation_unit: drives aggregation_unit with interleaved collectives on
// several communicators: int32 sum and max (with negative values), uint32 min
// and xor reductions, a gather whose contributions arrive in shuffled rank
// order, and forwarded packets (COLL_PASS and a table miss). A model in this
// testbench computes each expected result packet. Checks every result beat,
// its length and metadata, the forwarded packets, and that a finished result
// streams out at one beat per cycle.
module tb_aggregation_unit;
  import acis_pkg::*;
  localparam int NUM_COMM = 4, AGG_BEATS = 16;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   in_valid = 0, in_ready, out_valid, out_ready = 0;
  mbeat_t in_data = '0, out_data;
  logic   ev_reduce_done, ev_gather_done;

  aggregation_unit #(.NUM_COMM(NUM_COMM), .AGG_BEATS(AGG_BEATS)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { meta_t m; ctl_t c; vec_t d [$]; } pkt_t;
  pkt_t exp_q [$];

  // model state per communicator
  vec_t acc [NUM_COMM][AGG_BEATS];
  int   cnt [NUM_COMM];

  function automatic word_t ref_op(redop_e op, dtype_e dt, word_t a, word_t b);
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

  task automatic send(meta_t m, ctl_t c, vec_t d [$]);
    bit agg;
    agg = c.hit && (m.coll != COLL_PASS);
    if (!agg) exp_q.push_back('{m: m, c: c, d: d});   // forwarded as it enters
    for (int b = 0; b < d.size(); b++) begin
      @(negedge clk);
      in_valid = 1;
      in_data = '{meta: m, ctl: c, beat: '{data: d[b], last: b == d.size() - 1}};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    // model
    if (agg) begin
      int cm;
      cm = int'(m.comm_id);
      for (int b = 0; b < d.size(); b++) begin
        if (m.coll == COLL_GATHER) acc[cm][int'(m.src_rank) * d.size() + b] = d[b];
        else if (cnt[cm] == 0) acc[cm][b] = d[b];
        else for (int l = 0; l < LANES; l++) acc[cm][b][l] = ref_op(m.op, m.dtype, acc[cm][b][l], d[b][l]);
      end
      cnt[cm]++;
      if (cnt[cm] == int'(c.group_size)) begin
        pkt_t r;
        int n;
        n = (m.coll == COLL_GATHER) ? d.size() * cnt[cm] : d.size();
        r.m = m; r.m.nbeats = 16'(n); r.c = c;
        for (int b = 0; b < n; b++) r.d.push_back(acc[cm][b]);
        exp_q.push_back(r);
        cnt[cm] = 0;
      end
    end
  endtask

  function automatic meta_t mk(int comm, coll_e coll, redop_e op, dtype_e dt, int rank, int n);
    return '{comm_id: 8'(comm), coll: coll, op: op, dtype: dt, src_rank: 16'(rank),
             tag: 16'd7, nbeats: 16'(n), dst_rank: 16'd0};
  endfunction

  function automatic vec_t rnd(bit sml);
    vec_t v;
    for (int l = 0; l < LANES; l++) v[l] = sml ? 32'($urandom_range(0, 200)) - 32'd100 : $urandom;
    return v;
  endfunction

  int nres = 0, nred = 0, ngat = 0;
  always @(posedge clk) begin
    if (ev_reduce_done) nred++;
    if (ev_gather_done) ngat++;
  end

  // checker
  int ob = 0, first_cyc = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) begin
        checks++; failures++; $display("FAIL unexpected output comm %0d coll %0d nres %0d", out_data.meta.comm_id, out_data.meta.coll, nres);
      end else begin
        checks++;
        if (out_data.beat.data != exp_q[0].d[ob] || out_data.beat.last != (ob == exp_q[0].d.size() - 1) ||
            out_data.meta.nbeats != 16'(exp_q[0].d.size()) || out_data.meta.comm_id != exp_q[0].m.comm_id) begin
          failures++;
          $display("FAIL result %0d beat %0d: got %h exp %h", nres, ob, out_data.beat.data, exp_q[0].d[ob]);
        end
        if (ob == 0) first_cyc = cyc;
        if (out_data.beat.last) begin
          // results of aggregations stream at one beat per cycle (out_ready held high)
          if (exp_q[0].d.size() > 1 && exp_q[0].c.hit && exp_q[0].m.coll != COLL_PASS)
            check(cyc - first_cyc == exp_q[0].d.size() - 1, "one result beat per cycle");
          void'(exp_q.pop_front()); ob = 0; nres++;
        end else ob++;
      end
    end
  end

  initial begin
    ctl_t c4, c3, cmiss;
    vec_t d [$];
    int order [4];
    for (int i = 0; i < NUM_COMM; i++) cnt[i] = 0;
    c4 = '{hit: 1'b1, group_size: 16'd4, cgra_en: 1'b0, mcast_mask: 8'h3};
    c3 = '{hit: 1'b1, group_size: 16'd3, cgra_en: 1'b0, mcast_mask: 8'h1};
    cmiss = '0;
    out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      // comm 0: int32 sum, group 4, 3 beats; comm 1: int32 max, group 3, 2 beats,
      // interleaved with each other
      for (int r = 0; r < 4; r++) begin
        d = {}; for (int b = 0; b < 3; b++) d.push_back(rnd(0));
        send(mk(0, COLL_REDUCE, OP_SUM, DT_INT32, r, 3), c4, d);
        if (r < 3) begin
          d = {}; for (int b = 0; b < 2; b++) d.push_back(rnd(1));
          send(mk(1, COLL_REDUCE, OP_MAX, DT_INT32, r, 2), c3, d);
        end
      end
      // comm 2: uint32 min then xor (alternating rounds), group 3
      for (int r = 0; r < 3; r++) begin
        d = {}; for (int b = 0; b < 4; b++) d.push_back(rnd(round == 1));
        send(mk(2, COLL_REDUCE, round[0] ? OP_BXOR : OP_MIN, DT_UINT32, r, 4), c3, d);
      end
      // comm 3: gather, group 4, 2 beats each, shuffled rank order
      order = '{2, 0, 3, 1};
      for (int r = 0; r < 4; r++) begin
        d = {}; for (int b = 0; b < 2; b++) d.push_back(rnd(0));
        send(mk(3, COLL_GATHER, OP_SUM, DT_INT32, order[(r + round) % 4], 2), c4, d);
      end
      // forwarded: COLL_PASS and a table miss
      d = {}; for (int b = 0; b < 2; b++) d.push_back(rnd(0));
      send(mk(1, COLL_PASS, OP_SUM, DT_INT32, 0, 2), c3, d);
      send(mk(2, COLL_REDUCE, OP_SUM, DT_INT32, 0, 2), cmiss, d);
    end
    repeat (100) @(posedge clk);
    check(exp_q.size() == 0, "all results produced");
    check(nres == 3 * 6, $sformatf("result count %0d", nres));
    check(nred == 9 && ngat == 3, $sformatf("events reduce=%0d gather=%0d", nred, ngat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
