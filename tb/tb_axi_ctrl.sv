// tb_axi_ctrl: AXI-Lite master tasks write and read back every register of
// axi_ctrl (address before data, data before address, and both together),
// check the start pulse, the status bits driven by the loader signals, the
// communicator-table write strobe and entry, and that reads of unmapped
// addresses return zero. The master holds bready/rready low for a while to
// check that responses wait.
module tb_axi_ctrl;
  import acis_pkg::*;
  localparam int NUM_SPU = 3, CT_DEPTH = 64, NUM_COMM = 8;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic load_start, load_busy = 0, load_done = 0;
  addr_t prog_base [NUM_SPU];
  logic [6:0] prog_len [NUM_SPU];
  logic cfg_we;
  logic [2:0] cfg_idx;
  ctl_t cfg_entry;

  axi_ctrl #(.NUM_SPU(NUM_SPU), .CT_DEPTH(CT_DEPTH), .NUM_COMM(NUM_COMM)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nstart = 0, nwe = 0;
  ctl_t last_entry;
  logic [2:0] last_idx;
  always @(posedge clk) begin
    if (load_start) nstart++;
    if (cfg_we) begin nwe++; last_entry = cfg_entry; last_idx = cfg_idx; end
  end

  task automatic axi_write(logic [7:0] a, logic [31:0] d, int style);
    @(negedge clk);
    if (style != 2) begin s_awvalid = 1; s_awaddr = a; end
    if (style != 1) begin s_wvalid = 1; s_wdata = d; end
    fork
      begin
        if (style == 2) begin repeat (2) @(negedge clk); s_awvalid = 1; s_awaddr = a; end
        @(posedge clk); while (!s_awready) @(posedge clk);
        @(negedge clk); s_awvalid = 0;
      end
      begin
        if (style == 1) begin repeat (2) @(negedge clk); s_wvalid = 1; s_wdata = d; end
        @(posedge clk); while (!s_wready) @(posedge clk);
        @(negedge clk); s_wvalid = 0;
      end
    join
    while (!s_bvalid) @(negedge clk);
    repeat (2) @(negedge clk);
    check(s_bvalid && s_bresp == 2'b00, "write response held until taken");
    s_bready = 1; @(negedge clk); s_bready = 0;
    check(!s_bvalid, "write response cleared");
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); s_arvalid = 1; s_araddr = a;
    @(posedge clk); while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    repeat (2) @(negedge clk);
    d = s_rdata;
    s_rready = 1; @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NUM_SPU; s++) begin
      axi_write(8'(8'h10 + 8 * s), 32'h100 * (s + 1), s % 3);
      axi_write(8'(8'h14 + 8 * s), 32'(5 + s), (s + 1) % 3);
    end
    for (int s = 0; s < NUM_SPU; s++) begin
      check(prog_base[s] == 32'h100 * (s + 1) && prog_len[s] == 7'(5 + s), $sformatf("SPU %0d outputs", s));
      axi_read(8'(8'h10 + 8 * s), d); check(d == 32'h100 * (s + 1), "base readback");
      axi_read(8'(8'h14 + 8 * s), d); check(d == 32'(5 + s), "length readback");
    end
    axi_write(8'h00, 32'h1, 0);
    check(nstart == 1, "start pulse");
    load_busy = 1;
    axi_read(8'h04, d); check(d == 32'h1, "status busy");
    load_busy = 0; @(negedge clk); load_done = 1; @(negedge clk); load_done = 0;
    axi_read(8'h04, d); check(d == 32'h2, "status done");
    axi_write(8'h40, 32'h0002_0005, 1);   // valid, no CGRA, group 5
    axi_write(8'h44, 32'h0000_000D, 2);
    axi_write(8'h48, 32'd6, 0);
    check(nwe == 1 && last_idx == 3'd6, "table write strobe and index");
    check(last_entry.hit && !last_entry.cgra_en && last_entry.group_size == 16'd5 &&
          last_entry.mcast_mask == 8'h0D, "table entry fields");
    axi_read(8'h40, d); check(d == 32'h0002_0005, "COMM0 readback");
    axi_write(8'h40, 32'h0001_0002, 0);   // CGRA enabled, entry invalid
    axi_write(8'h48, 32'd1, 2);
    check(nwe == 2 && last_idx == 3'd1 && !last_entry.hit && last_entry.cgra_en &&
          last_entry.group_size == 16'd2, "second table entry");
    axi_read(8'h7C, d); check(d == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
