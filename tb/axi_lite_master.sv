// axi_lite_master: testbench-only AXI-Lite master with blocking write and
// read tasks (address and data offered together, responses taken at once).
module axi_lite_master (
  input  logic        clk,
  output logic        awvalid,
  input  logic        awready,
  output logic [7:0]  awaddr,
  output logic        wvalid,
  input  logic        wready,
  output logic [31:0] wdata,
  input  logic        bvalid,
  output logic        bready,
  output logic        arvalid,
  input  logic        arready,
  output logic [7:0]  araddr,
  input  logic        rvalid,
  output logic        rready,
  input  logic [31:0] rdata
);
  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; wdata = 0; araddr = 0;
  end

  task automatic write(logic [7:0] a, logic [31:0] d);
    bit aw_done, w_done;
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d; bready = 1;
    aw_done = 0; w_done = 0;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (awready) aw_done = 1;
      if (wready) w_done = 1;
      @(negedge clk);
      if (aw_done) awvalid = 0;
      if (w_done) wvalid = 0;
    end
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a; rready = 1;
    @(posedge clk); while (!arready) @(posedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask
endmodule
