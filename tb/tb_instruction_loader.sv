// tb_instruction_loader: preloads a memory bank model with three programs,
// asks instruction_loader to load them (one SPU with an empty program, one
// with a length that is not a multiple of the beat width), and reads every CT
// back through the fetch ports. Checks CT contents, active lengths (zero
// while loading), the done pulse, and the number of memory reads. A second
// load with other lengths checks that reloading replaces the programs.
module tb_instruction_loader;
  import acis_pkg::*;
  localparam int NUM_SPU = 3, CT_DEPTH = 16;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  addr_t base [NUM_SPU];
  logic [4:0] len [NUM_SPU];
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  addr_t rd_req_addr;
  vec_t rd_rsp_data;
  logic [3:0] fetch_pc [NUM_SPU];
  logic [31:0] fetch_instr [NUM_SPU];
  logic [4:0] prog_len [NUM_SPU];
  logic wr_req_ready, wr_ack;

  instruction_loader #(.NUM_SPU(NUM_SPU), .CT_DEPTH(CT_DEPTH)) dut (.*);
  hbm_model #(.DEPTH(64), .LATENCY(2)) u_mem (.clk, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_rsp_valid, .rd_rsp_data, .wr_req_valid(1'b0), .wr_req_ready, .wr_req('0), .wr_ack);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nreads = 0, ndone = 0, busy_nonzero = 0;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) nreads++;
    if (done) ndone++;
    if (busy) for (int s = 0; s < NUM_SPU; s++) if (prog_len[s] != 0) busy_nonzero++;
  end

  function automatic logic [31:0] word_at(int addr, int lane);
    return 32'hA000_0000 | 32'(addr * 16 + lane);
  endfunction

  task automatic load_and_check(int b0, int l0, int b1, int l1, int b2, int l2);
    int bs [3], ls [3], exp_reads;
    bs = '{b0, b1, b2}; ls = '{l0, l1, l2};
    exp_reads = 0;
    for (int s = 0; s < NUM_SPU; s++) begin
      base[s] = addr_t'(bs[s]); len[s] = 5'(ls[s]);
      exp_reads += (ls[s] + LANES - 1) / LANES;
    end
    nreads = 0; ndone = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    check(ndone == 1 && !busy, "one done pulse, idle after");
    check(nreads == exp_reads, $sformatf("memory reads %0d expected %0d", nreads, exp_reads));
    for (int s = 0; s < NUM_SPU; s++) begin
      check(int'(prog_len[s]) == ls[s], $sformatf("SPU %0d length", s));
      for (int i = 0; i < ls[s]; i++) begin
        fetch_pc[s] = 4'(i); #1;
        check(fetch_instr[s] == word_at(bs[s] + i / LANES, i % LANES),
              $sformatf("SPU %0d CT[%0d]", s, i));
      end
    end
  endtask

  initial begin
    for (int s = 0; s < NUM_SPU; s++) begin base[s] = '0; len[s] = '0; fetch_pc[s] = '0; end
    for (int a = 0; a < 64; a++) for (int l = 0; l < LANES; l++) u_mem.mem[a][l] = word_at(a, l);
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < NUM_SPU; s++) check(prog_len[s] == 0, "empty after reset");
    load_and_check(4, 7, 0, 0, 20, 12);
    load_and_check(30, 3, 10, 16, 0, 0);
    check(busy_nonzero == 0, "no active program length while loading");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
