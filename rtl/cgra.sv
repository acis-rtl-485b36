// cgra: the coarse-grained reconfigurable array plugin that runs user map
// functions (for example the prefix sum between two allgathers of a fused
// collective) on packets inside the switch.
//
// Structure, in stream order:
//  * Stream-In: LANES FIFOs, one per 32-bit lane, take the input beats.
//  * Disassembler: pops one word from every lane FIFO to form the vector beat
//    for the first SPU, and sends the packet's metadata into a side FIFO that
//    bypasses the SPUs (the "meta data" line of the CGRA figure).
//  * NUM_SPU SPUs in a chain, each running its own program from its CT, each
//    with its own read/write masters to a separate memory bank.
//  * Assembler: counts the beats leaving the last SPU into the Stream-Out lane
//    FIFOs; when the packet's last beat arrives it releases the metadata with
//    nbeats set to the count, and the packet is sent on. A map function may
//    therefore change a packet's length (a dot product returns one beat).
//  * Instruction loader with the CTs, and the AXI-Lite control block.
// An SPU with an empty program is bypassed, so with no programs loaded the
// CGRA forwards packets unchanged. Output packets must not exceed OUT_DEPTH
// beats, since the stream-out FIFOs hold a whole packet before it is released.
// Latency is that of the FIFOs (one cycle each side) plus the programs' run
// time; throughput is set by the slowest SPU program.
//
// The three SPUs in a deep pipeline, the parts of each and the AXI packaging
// follow the paper's CGRA figure; sizes, FIFO depths and formats are this
// design's choices.
module cgra
  import acis_pkg::*;
#(
  parameter int unsigned NUM_SPU   = 3,
  parameter int unsigned NUM_VREG  = 8,
  parameter int unsigned CT_DEPTH  = 64,
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 256,
  parameter int unsigned NUM_COMM  = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Stream in / out with sideband
  input  logic        in_valid,
  output logic        in_ready,
  input  mbeat_t      in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output mbeat_t      out_data,
  // AXI-Lite control
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // communicator table writes (to the collective control plugin)
  output logic                        cfg_we,
  output logic [$clog2(NUM_COMM)-1:0] cfg_idx,
  output ctl_t                        cfg_entry,
  // instruction loader HBM read master
  output logic        il_rd_req_valid,
  input  logic        il_rd_req_ready,
  output addr_t       il_rd_req_addr,
  input  logic        il_rd_rsp_valid,
  input  vec_t        il_rd_rsp_data,
  // per-SPU HBM read / write masters
  output logic    [NUM_SPU-1:0] rd_req_valid,
  input  logic    [NUM_SPU-1:0] rd_req_ready,
  output addr_t                 rd_req_addr [NUM_SPU],
  input  logic    [NUM_SPU-1:0] rd_rsp_valid,
  input  vec_t                  rd_rsp_data [NUM_SPU],
  output logic    [NUM_SPU-1:0] wr_req_valid,
  input  logic    [NUM_SPU-1:0] wr_req_ready,
  output wr_req_t               wr_req      [NUM_SPU],
  input  logic    [NUM_SPU-1:0] wr_ack,
  output logic    [NUM_SPU-1:0] spu_busy,
  output logic                  ev_mem
);
  localparam int unsigned PW = $clog2(CT_DEPTH);

  typedef struct packed { word_t w; logic last; } lw_t;
  typedef struct packed { meta_t meta; ctl_t ctl; } side_t;

  // ---------------- Stream-In FIFOs + disassembler ----------------
  logic [LANES-1:0] si_in_ready, si_out_valid;
  lw_t              si_out [LANES];
  logic             mi_in_ready, mi_out_valid, mi_out_ready;
  side_t            mi_out;
  logic             sop_q;           // next input beat starts a packet
  logic             spu_in_valid [NUM_SPU+1];
  logic             spu_in_ready [NUM_SPU+1];
  beat_t            spu_in_beat  [NUM_SPU+1];

  assign in_ready = (&si_in_ready) && (!sop_q || mi_in_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sop_q <= 1'b1;
    else if (in_valid && in_ready) sop_q <= in_data.beat.last;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_si
    sync_fifo #(.T(lw_t), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (in_valid && in_ready),
      .in_ready (si_in_ready[l]),
      .in_data  ('{w: in_data.beat.data[l], last: in_data.beat.last}),
      .out_valid(si_out_valid[l]),
      .out_ready(spu_in_ready[0] && (&si_out_valid)),
      .out_data (si_out[l]),
      .count    ()
    );
    assign spu_in_beat[0].data[l] = si_out[l].w;
  end
  assign spu_in_beat[0].last = si_out[0].last;
  assign spu_in_valid[0]     = &si_out_valid;

  sync_fifo #(.T(side_t), .DEPTH(IN_DEPTH)) u_meta_in (
    .clk, .rst_n,
    .in_valid (in_valid && in_ready && sop_q),
    .in_ready (mi_in_ready),
    .in_data  ('{meta: in_data.meta, ctl: in_data.ctl}),
    .out_valid(mi_out_valid),
    .out_ready(mi_out_ready),
    .out_data (mi_out),
    .count    ()
  );

  // ---------------- control and instruction loader ----------------
  logic                load_start, load_busy, load_done;
  addr_t               prog_base [NUM_SPU];
  logic [PW:0]         cfg_len   [NUM_SPU];
  logic [PW-1:0]       fetch_pc  [NUM_SPU];
  logic [31:0]         fetch_ins [NUM_SPU];
  logic [PW:0]         prog_len  [NUM_SPU];

  axi_ctrl #(.NUM_SPU(NUM_SPU), .CT_DEPTH(CT_DEPTH), .NUM_COMM(NUM_COMM)) u_ctrl (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .load_start, .load_busy, .load_done,
    .prog_base, .prog_len(cfg_len),
    .cfg_we, .cfg_idx, .cfg_entry
  );

  instruction_loader #(.NUM_SPU(NUM_SPU), .CT_DEPTH(CT_DEPTH)) u_loader (
    .clk, .rst_n,
    .start(load_start), .base(prog_base), .len(cfg_len),
    .busy(load_busy), .done(load_done),
    .rd_req_valid(il_rd_req_valid), .rd_req_ready(il_rd_req_ready),
    .rd_req_addr(il_rd_req_addr), .rd_rsp_valid(il_rd_rsp_valid),
    .rd_rsp_data(il_rd_rsp_data),
    .fetch_pc, .fetch_instr(fetch_ins), .prog_len
  );

  // ---------------- SPU chain ----------------
  logic [NUM_SPU-1:0] spu_ev_mem;
  for (genvar s = 0; s < NUM_SPU; s++) begin : g_spu
    spu #(.NUM_VREG(NUM_VREG), .CT_DEPTH(CT_DEPTH)) u_spu (
      .clk, .rst_n,
      .pc(fetch_pc[s]), .instr(fetch_ins[s]), .prog_len(prog_len[s]),
      .in_valid (spu_in_valid[s]),   .in_ready (spu_in_ready[s]),   .in_beat (spu_in_beat[s]),
      .out_valid(spu_in_valid[s+1]), .out_ready(spu_in_ready[s+1]), .out_beat(spu_in_beat[s+1]),
      .rd_req_valid(rd_req_valid[s]), .rd_req_ready(rd_req_ready[s]),
      .rd_req_addr(rd_req_addr[s]), .rd_rsp_valid(rd_rsp_valid[s]),
      .rd_rsp_data(rd_rsp_data[s]),
      .wr_req_valid(wr_req_valid[s]), .wr_req_ready(wr_req_ready[s]),
      .wr_req(wr_req[s]), .wr_ack(wr_ack[s]),
      .busy(spu_busy[s]), .ev_mem(spu_ev_mem[s])
    );
  end
  assign ev_mem = |spu_ev_mem;

  // ---------------- assembler + Stream-Out FIFOs ----------------
  logic [LANES-1:0] so_in_ready, so_out_valid;
  lw_t              so_out [LANES];
  logic [15:0]      cnt_q;
  logic             mo_in_ready, mo_out_valid;
  side_t            mo_in, mo_out;
  logic             asm_take, out_take;

  assign spu_in_ready[NUM_SPU] = (&so_in_ready) && mi_out_valid &&
                                 (!spu_in_beat[NUM_SPU].last || mo_in_ready);
  assign asm_take     = spu_in_valid[NUM_SPU] && spu_in_ready[NUM_SPU];
  assign mi_out_ready = asm_take && spu_in_beat[NUM_SPU].last;

  always_comb begin
    mo_in = mi_out;
    mo_in.meta.nbeats = cnt_q + 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else if (asm_take) cnt_q <= spu_in_beat[NUM_SPU].last ? '0 : cnt_q + 16'd1;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_so
    sync_fifo #(.T(lw_t), .DEPTH(OUT_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (asm_take),
      .in_ready (so_in_ready[l]),
      .in_data  ('{w: spu_in_beat[NUM_SPU].data[l], last: spu_in_beat[NUM_SPU].last}),
      .out_valid(so_out_valid[l]),
      .out_ready(out_take),
      .out_data (so_out[l]),
      .count    ()
    );
    assign out_data.beat.data[l] = so_out[l].w;
  end

  sync_fifo #(.T(side_t), .DEPTH(4)) u_meta_out (
    .clk, .rst_n,
    .in_valid (mi_out_ready),
    .in_ready (mo_in_ready),
    .in_data  (mo_in),
    .out_valid(mo_out_valid),
    .out_ready(out_take && so_out[0].last),
    .out_data (mo_out),
    .count    ()
  );

  assign out_valid          = mo_out_valid && (&so_out_valid);
  assign out_take           = out_valid && out_ready;
  assign out_data.beat.last = so_out[0].last;
  assign out_data.meta      = mo_out.meta;
  assign out_data.ctl       = mo_out.ctl;

  // A packet longer than the stream-out FIFOs can never be released.
  a_pkt_fits: assert property (@(posedge clk) disable iff (!rst_n)
                               asm_take |-> cnt_q < 16'(OUT_DEPTH));
endmodule
