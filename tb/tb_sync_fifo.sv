// tb_sync_fifo: pushes a numbered sequence through a sync_fifo with random
// stalls on both sides and checks order, the full flag (in_ready low after
// DEPTH pushes without pops), the count output and one-cycle latency.
module tb_sync_fifo;
  import acis_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 0, in_ready, out_valid, out_ready = 0;
  beat_t in_data = '0, out_data;
  logic [$clog2(DEPTH):0] count;

  sync_fifo #(.T(beat_t), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nexp = 0, nsent = 0;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // fill to full
    for (int i = 0; i < DEPTH; i++) begin
      in_valid <= 1; in_data <= '{data: {32'(i * 3), 32'(~i), 32'(i)}, last: 1'b0};
      @(posedge clk);
      if (i == 0) begin #1 check(out_valid, "data visible one cycle after push"); end
    end
    in_valid <= 0; nsent = DEPTH;
    @(posedge clk);
    check(!in_ready && count == DEPTH, "full after DEPTH pushes");
    // random traffic
    fork
      begin
        while (nsent < 300) begin
          in_valid <= ($urandom_range(0, 2) != 0);
          in_data  <= '{data: {32'(nsent * 3), 32'(~nsent), 32'(nsent)}, last: nsent[0]};
          @(posedge clk);
          if (in_valid && in_ready) nsent++;
        end
        in_valid <= 0;
      end
      begin
        while (nexp < 300) begin
          out_ready <= ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            check(out_data.data[0] == 32'(nexp) && out_data.data[1] == 32'(~nexp) &&
                  out_data.data[2] == 32'(nexp * 3), $sformatf("order item %0d", nexp));
            nexp++;
          end
        end
        out_ready <= 0;
      end
    join
    @(posedge clk);
    check(count == 0 && !out_valid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
