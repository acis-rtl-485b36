// tb_multicast_engine: sends numbered beats with random multicast masks into
// multicast_engine while each of the four outputs stalls at random. Every
// output must receive exactly the beats whose mask names it, in order, each
// once; beats with an empty mask vanish.
module tb_multicast_engine;
  import acis_pkg::*;
  localparam int NP = 4, NB = 200;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic    in_valid = 0, in_ready, ev_multi;
  mcbeat_t in_data = '0;
  logic [NP-1:0] out_valid, out_ready = '0;
  beat_t   out_beat;

  multicast_engine #(.NUM_PIPES(NP)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [NP-1:0] mask [NB];
  int exp_q [NP][$];
  int nmulti = 0;

  initial begin
    for (int i = 0; i < NB; i++) begin
      mask[i] = NP'($urandom);
      for (int o = 0; o < NP; o++) if (mask[i][o]) exp_q[o].push_back(i);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NB; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data = '{mask: 8'(mask[i]), beat: '{data: {32'(i), 32'(i), 32'(i)}, last: 1'b1}};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (ev_multi) nmulti++;
    end
    @(negedge clk); in_valid = 0;
  end

  always @(negedge clk) out_ready <= NP'($urandom);

  always @(posedge clk) begin
    for (int o = 0; o < NP; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        checks++;
        if (exp_q[o].size() == 0 || int'(out_beat.data[0]) != exp_q[o][0]) begin
          failures++; $display("FAIL output %0d got %0d", o, out_beat.data[0]);
        end
        if (exp_q[o].size() > 0) void'(exp_q[o].pop_front());
      end
    end
  end

  initial begin
    wait (rst_n);
    repeat (NB * 8) @(posedge clk);
    for (int o = 0; o < NP; o++) check(exp_q[o].size() == 0, $sformatf("output %0d got all beats", o));
    check(nmulti > 0, "multicast event seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
