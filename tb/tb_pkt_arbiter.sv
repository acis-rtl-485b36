// tb_pkt_arbiter: three sources send packets of random length (each beat tags
// source and packet number) into pkt_arbiter with random output stalls. Checks
// that packets are never interleaved (sources pause inside packets), that every packet arrives complete and
// in per-source order, and that with all sources busy the grant rotates.
module tb_pkt_arbiter;
  import acis_pkg::*;
  localparam int N = 3, NPKT = 20;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] in_valid, in_ready, in_last;
  beat_t        in_data [N];
  logic         out_valid, out_ready, out_last;
  beat_t        out_data;

  pkt_arbiter #(.T(beat_t), .N(N)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int len [N][NPKT];
  int pk [N], bt [N];
  always_comb for (int s = 0; s < N; s++) in_last[s] = in_data[s].last;

  // sources
  for (genvar s = 0; s < N; s++) begin : g_src
    initial begin
      in_valid[s] = 0; in_data[s] = '0; pk[s] = 0; bt[s] = 0;
      wait (rst_n);
      while (pk[s] < NPKT) begin
        @(negedge clk);
        // idle gaps inside packets: the grant must stay with the packet's source
        while ($urandom_range(0, 3) == 0) begin in_valid[s] = 0; @(negedge clk); end
        in_valid[s] = 1;
        in_data[s]  = '{data: {32'(bt[s]), 32'(pk[s]), 32'(s)}, last: bt[s] == len[s][pk[s]] - 1};
        @(posedge clk);
        if (in_ready[s]) begin
          if (in_data[s].last) begin pk[s]++; bt[s] = 0; end else bt[s]++;
        end
      end
      @(negedge clk); in_valid[s] = 0;
    end
  end

  int got_pk [N];
  int cur = -1, cur_bt = 0, done_pkts = 0, prev_src = -1, rotations = 0;
  initial begin
    for (int s = 0; s < N; s++) begin
      got_pk[s] = 0;
      for (int p = 0; p < NPKT; p++) len[s][p] = $urandom_range(1, 5);
    end
    out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    while (done_pkts < N * NPKT) begin
      @(negedge clk); out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        int s, p, b;
        s = int'(out_data.data[0]); p = int'(out_data.data[1]); b = int'(out_data.data[2]);
        if (cur < 0) begin
          cur = s; cur_bt = 0;
          check(p == got_pk[s], $sformatf("source %0d packet order", s));
          if (prev_src >= 0 && s != prev_src) rotations++;
        end
        check(s == cur && b == cur_bt, $sformatf("no interleave (src %0d beat %0d)", s, b));
        cur_bt++;
        if (out_last) begin
          check(cur_bt == len[s][p], "packet length");
          got_pk[s]++; done_pkts++; prev_src = cur; cur = -1;
        end
      end
    end
    check(rotations >= N * NPKT / 2, $sformatf("grant rotates (%0d switches)", rotations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
