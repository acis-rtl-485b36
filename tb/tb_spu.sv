// tb_spu: runs one SPU with programs held in a testbench CT array and a memory
// bank model. Three phases: (1) bypass with an empty program: beats pass
// unchanged; (2) the prefix-sum program over two packets of random length,
// output compared with a running sum computed here, including the per-packet
// instruction count (cycles from first pop to last push); (3) the
// scale-store-reload program: results must equal 2x the input and the memory
// bank must hold them, which exercises VST, VLD, the address registers and the
// memory stalls; (4) sparse multiply-accumulate into the memory bank: the
// vector multiply-accumulate instruction with loads and stores addressed by a
// row index taken from the data. Input and output stall at random.
module tb_spu;
  import acis_pkg::*;
  import spu_asm_pkg::*;
  localparam int CT_DEPTH = 64;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0]  pc;
  logic [31:0] instr;
  logic [6:0]  prog_len = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  beat_t in_beat = '0, out_beat;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready, wr_ack;
  addr_t rd_req_addr;
  vec_t rd_rsp_data;
  wr_req_t wr_req;
  logic busy, ev_mem;

  logic [31:0] ct [CT_DEPTH];
  assign instr = ct[pc];

  spu #(.CT_DEPTH(CT_DEPTH)) dut (.*);
  hbm_model #(.DEPTH(64), .LATENCY(3)) u_mem (.clk, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_rsp_valid, .rd_rsp_data, .wr_req_valid, .wr_req_ready, .wr_req, .wr_ack);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  vec_t in_q [$], exp_q [$];
  bit   last_q [$];
  bit   stall_in = 1, stall_out = 1;
  int   nmem = 0;
  always @(posedge clk) if (ev_mem) nmem++;

  // stream driver
  initial begin
    wait (!rst_n); wait (rst_n);
    forever begin
      @(negedge clk);
      if (in_q.size() > 0 && (!stall_in || $urandom_range(0, 2) != 0)) begin
        in_valid = 1; in_beat = '{data: in_q[0], last: last_q[0]};
      end else in_valid = 0;
      @(posedge clk);
      if (in_valid && in_ready) begin void'(in_q.pop_front()); void'(last_q.pop_front()); end
    end
  end

  int nout = 0, last_seen = 0;
  always @(negedge clk) out_ready <= !stall_out || ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_beat.data != exp_q[0]) begin
      failures++; $display("FAIL output %0d got %h", nout, out_beat.data);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    nout++;
    if (out_beat.last) last_seen++;
  end

  task automatic pkt(int n, int mode);   // mode 0 copy, 1 prefix sum, 2 doubled
    word_t run;
    run = 0;
    for (int b = 0; b < n; b++) begin
      vec_t v, e;
      for (int l = 0; l < LANES; l++) v[l] = $urandom_range(0, 1000);
      for (int l = 0; l < LANES; l++) begin
        run += v[l];
        e[l] = (mode == 0) ? v[l] : (mode == 1) ? run : 2 * v[l];
      end
      in_q.push_back(v); last_q.push_back(b == n - 1); exp_q.push_back(e);
    end
  endtask

  task automatic wait_drain();
    int t;
    t = 0;
    while ((exp_q.size() > 0 || busy) && t < 5000) begin @(posedge clk); t++; end
    repeat (5) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < CT_DEPTH; i++) ct[i] = halt();
    repeat (3) @(posedge clk); rst_n = 1;
    // (1) bypass
    pkt(5, 0);
    wait_drain();
    check(exp_q.size() == 0 && nout == 5, "bypass passes beats");
    // (2) prefix sum
    for (int i = 0; i < PSUM_LEN; i++) ct[i] = psum_prog(i);
    prog_len = 7'(PSUM_LEN);
    pkt(4, 1); pkt(7, 1);
    wait_drain();
    check(exp_q.size() == 0 && last_seen == 3, "prefix sum over two packets");
    // cycle count with no stalls: 1 + 10 instructions per beat + final push
    stall_in = 0; stall_out = 0;
    begin
      int t0, t1;
      pkt(6, 1);
      @(posedge clk); while (!busy) @(posedge clk);
      t0 = $time;
      while (busy) @(posedge clk);
      t1 = $time;
      // init + 10 per non-last beat + 8 for the last + PUSHL + HALT
      check((t1 - t0) / 10 == 1 + 5 * 10 + 8 + 1 + 1,
            $sformatf("prefix sum takes %0d cycles for 6 beats", (t1 - t0) / 10));
    end
    wait_drain();
    // (3) store / reload
    stall_in = 1; stall_out = 1;
    for (int i = 0; i < CT_DEPTH; i++) ct[i] = halt();
    for (int i = 0; i < STORE_LEN; i++) ct[i] = store_prog(i);
    prog_len = 7'(STORE_LEN);
    pkt(5, 2);
    wait_drain();
    check(exp_q.size() == 0, "store/reload results");
    check(nmem == 10, $sformatf("memory operations %0d", nmem));
    for (int b = 0; b < 5; b++) check(u_mem.mem[16 + b][0][0] == 1'b0, "stored values are doubled (even)");
    check(u_mem.mem[15] == '0 && u_mem.mem[21] == '0, "stores stay inside their range");
    // (4) sparse multiply-accumulate: V_MAC with indexed load/store
    for (int i = 0; i < CT_DEPTH; i++) ct[i] = halt();
    for (int i = 0; i < SPMV_LEN; i++) ct[i] = spmv_prog(i);
    prog_len = 7'(SPMV_LEN);
    begin
      word_t acc [8];
      int row;
      vec_t e;
      for (int r = 0; r < 8; r++) acc[r] = 0;
      for (int b = 0; b < 12; b++) begin
        vec_t v;
        row = $urandom_range(0, 7);
        v[0] = 32'(row); v[1] = 32'($urandom_range(0, 300)) - 32'd150; v[2] = $urandom_range(0, 300);
        acc[row] += v[1] * v[2];
        in_q.push_back(v); last_q.push_back(b == 11);
      end
      e = '0; e[2] = acc[row];
      exp_q.push_back(e);
      wait_drain();
      check(exp_q.size() == 0, "sparse accumulation sends the last updated row");
      for (int r = 0; r < 8; r++)
        check(u_mem.mem[r] == {acc[r], 32'd0, 32'd0}, $sformatf("row %0d accumulated", r));
      check(nmem == 10 + 24, $sformatf("memory operations %0d", nmem));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
