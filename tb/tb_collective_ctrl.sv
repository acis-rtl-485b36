// tb_collective_ctrl: programs every communicator entry of collective_ctrl
// with a distinct context, leaves one invalid, then streams beats of random
// communicators (some outside the table) with random stalls. Each output beat
// must carry its input's metadata and beat and the context of its
// communicator (hit=0 for missing entries), in order, one cycle after entry.
module tb_collective_ctrl;
  import acis_pkg::*;
  localparam int NUM_COMM = 8;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [$clog2(NUM_COMM)-1:0] cfg_idx = '0;
  ctl_t cfg_entry = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  meta_t in_meta = '0;
  beat_t in_beat = '0;
  mbeat_t out_data;

  collective_ctrl #(.NUM_COMM(NUM_COMM)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  ctl_t tbl [NUM_COMM];
  mbeat_t q [$];

  function automatic ctl_t expect_ctl(logic [7:0] c);
    if (c >= NUM_COMM) return '0;
    return tbl[c];
  endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NUM_COMM; c++) begin
      tbl[c] = '{hit: c != 5, group_size: 16'(c + 2), cgra_en: c[0], mcast_mask: 8'(1 << (c % 4)) | 8'h1};
      @(negedge clk); cfg_we = 1; cfg_idx = 3'(c); cfg_entry = tbl[c];
    end
    @(negedge clk); cfg_we = 0;
    fork
      begin
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        in_valid = $urandom_range(0, 3) != 0;
        in_meta  = '0; in_meta.comm_id = 8'($urandom_range(0, NUM_COMM + 2)); in_meta.tag = 16'(i);
        in_beat  = '{data: {32'(i), 32'($urandom), 32'($urandom)}, last: 1'($urandom)};
        @(posedge clk);
        if (in_valid && in_ready)
          q.push_back('{meta: in_meta, ctl: expect_ctl(in_meta.comm_id), beat: in_beat});
        #1;
      end
      @(negedge clk); in_valid = 0;
      end
      begin
      for (int i = 0; i < 260; i++) begin
        @(negedge clk); out_ready = $urandom_range(0, 3) != 0;
        @(posedge clk);
        if (out_valid && out_ready) begin
          check(q.size() > 0 && out_data == q[0], $sformatf("beat %0d", i));
          if (q.size() > 0) void'(q.pop_front());
        end
      end
      end
    join
    check(q.size() == 0, "all beats delivered");
    // latency: one beat into an empty unit appears the next cycle
    @(negedge clk); in_valid = 1; out_ready = 1; in_meta.comm_id = 8'd2;
    @(posedge clk); #1 in_valid = 0;
    check(out_valid && out_data.ctl == tbl[2], "one-cycle lookup latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
