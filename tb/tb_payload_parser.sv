// tb_payload_parser: sends alternating ACiS packets (header with the acis bit
// set, random fields and length) and plain packets into payload_parser with
// random output stalls. ACiS packets must come out without their header, every
// data beat carrying the decoded fields; plain packets must come out on the
// bypass port unchanged, header beat included.
module tb_payload_parser;
  import acis_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 0, in_ready, acis_valid, acis_ready, byp_valid, byp_ready;
  beat_t in_beat = '0, acis_beat, byp_beat;
  meta_t acis_meta;

  payload_parser dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NPKT = 24;
  meta_t m [NPKT];
  int    n [NPKT];

  function automatic vec_t dat(int p, int b);
    return {32'(p * 1000 + b + 2), 32'(p * 1000 + b + 1), 32'(p * 1000 + b)};
  endfunction

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      m[p] = '{comm_id: 8'($urandom), coll: coll_e'($urandom_range(0, 2)),
               op: redop_e'($urandom_range(0, 6)), dtype: dtype_e'($urandom_range(0, 1)),
               src_rank: 16'($urandom), tag: 16'($urandom), nbeats: 16'($urandom_range(1, 6)),
               dst_rank: 16'($urandom)};
      n[p] = int'(m[p].nbeats);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < NPKT; p++) begin
      for (int b = -1; b < n[p]; b++) begin
        @(negedge clk);
        in_valid = 1;
        if (b < 0) begin
          in_beat.data = pack_header(m[p]);
          if (p % 2) in_beat.data[0][0] = 1'b0;   // odd packets: not for ACiS
          in_beat.last = 1'b0;
        end else begin
          in_beat = '{data: dat(p, b), last: b == n[p] - 1};
        end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
  end

  int ap = 0, ab = 0, bp = 1, bb = -1;
  initial begin
    acis_ready = 0; byp_ready = 0;
    wait (rst_n);
    while (ap < NPKT || bp < NPKT) begin
      @(negedge clk);
      acis_ready = $urandom_range(0, 2) != 0;
      byp_ready  = $urandom_range(0, 2) != 0;
      @(posedge clk);
      if (acis_valid && acis_ready) begin
        check(acis_meta == m[ap], $sformatf("meta of packet %0d", ap));
        check(acis_beat.data == dat(ap, ab) && acis_beat.last == (ab == n[ap] - 1),
              $sformatf("ACiS beat %0d.%0d", ap, ab));
        if (acis_beat.last) begin ap += 2; ab = 0; end else ab++;
      end
      if (byp_valid && byp_ready) begin
        if (bb < 0) begin
          vec_t h;
          h = pack_header(m[bp]); h[0][0] = 1'b0;
          check(byp_beat.data == h && !byp_beat.last, $sformatf("bypass header %0d", bp));
        end else begin
          check(byp_beat.data == dat(bp, bb) && byp_beat.last == (bb == n[bp] - 1),
                $sformatf("bypass beat %0d.%0d", bp, bb));
        end
        if (byp_beat.last) begin bp += 2; bb = -1; end else bb++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
