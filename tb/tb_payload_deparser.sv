// tb_payload_deparser: feeds packets with random metadata, context and length
// into payload_deparser under random output stalls. Each packet must leave as
// one header beat equal to pack_header(meta) followed by its data beats, every
// beat tagged with the communicator's multicast mask (pipe 0 for a miss).
module tb_payload_deparser;
  import acis_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic    in_valid = 0, in_ready, out_valid, out_ready = 0;
  mbeat_t  in_data = '0;
  mcbeat_t out_data;

  payload_deparser dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NPKT = 20;
  meta_t m [NPKT];
  ctl_t  c [NPKT];

  function automatic vec_t dat(int p, int b);
    return {32'(p), 32'(b), 32'(p * 77 + b)};
  endfunction

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      m[p] = '{comm_id: 8'($urandom), coll: COLL_REDUCE, op: OP_MAX, dtype: DT_INT32,
               src_rank: 16'($urandom), tag: 16'($urandom), nbeats: 16'($urandom_range(1, 5)),
               dst_rank: 16'($urandom)};
      c[p] = '{hit: p % 3 != 0, group_size: 16'd4, cgra_en: 1'b0, mcast_mask: 8'($urandom_range(1, 255))};
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < NPKT; p++) begin
      for (int b = 0; b < int'(m[p].nbeats); b++) begin
        @(negedge clk);
        in_valid = 1;
        in_data = '{meta: m[p], ctl: c[p], beat: '{data: dat(p, b), last: b == int'(m[p].nbeats) - 1}};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
  end

  int p = 0, b = -1;
  initial begin
    wait (rst_n);
    while (p < NPKT) begin
      @(negedge clk); out_ready = $urandom_range(0, 2) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(out_data.mask == (c[p].hit ? c[p].mcast_mask : 8'h01), $sformatf("mask %0d", p));
        if (b < 0) check(out_data.beat.data == pack_header(m[p]) && !out_data.beat.last,
                         $sformatf("header %0d", p));
        else check(out_data.beat.data == dat(p, b) && out_data.beat.last == (b == int'(m[p].nbeats) - 1),
                   $sformatf("beat %0d.%0d", p, b));
        if (out_data.beat.last) begin p++; b = -1; end else b++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
