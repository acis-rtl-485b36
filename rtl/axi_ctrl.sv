// axi_ctrl: AXI-Lite slave holding the control registers of the ACiS plugin.
// The control plane (switch CPU) uses it to load SPU programs and to write the
// communicator table of the collective control plugin.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL     write 1 to bit 0: start the instruction load (pulse)
//   0x04 STATUS   bit 0 loader busy, bit 1 a load has completed (read only)
//   0x10+8*s      SPU s program base (beat address in instruction memory)
//   0x14+8*s      SPU s program length (instructions; 0 = SPU bypassed)
//   0x40 COMM0    group_size[15:0], cgra_en[16], valid[17]
//   0x44 COMM1    multicast mask
//   0x48 COMMWR   write a communicator id: commits COMM0/COMM1 to that entry
// Writes take the address and data channels in the same or different cycles
// and answer with OKAY one cycle after both are held; reads answer one cycle
// after the address. One transaction of each kind at a time; strobes are
// ignored (full-word writes). Unmapped addresses read as 0. The paper shows an
// AXI-Lite control block; the register map is this design's.
module axi_ctrl
  import acis_pkg::*;
#(
  parameter int unsigned NUM_SPU  = 3,
  parameter int unsigned CT_DEPTH = 64,
  parameter int unsigned NUM_COMM = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite
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
  // to the instruction loader
  output logic                      load_start,
  input  logic                      load_busy,
  input  logic                      load_done,
  output addr_t                     prog_base [NUM_SPU],
  output logic [$clog2(CT_DEPTH):0] prog_len  [NUM_SPU],
  // to the collective control table
  output logic                        cfg_we,
  output logic [$clog2(NUM_COMM)-1:0] cfg_idx,
  output ctl_t                        cfg_entry
);
  localparam int unsigned PW = $clog2(CT_DEPTH);

  logic        aw_q, w_q, loaded_q;
  logic [7:0]  awaddr_q;
  logic [31:0] wdata_q, comm0_q, comm1_q;

  assign s_awready = !aw_q && !s_bvalid;
  assign s_wready  = !w_q && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  wire do_write = aw_q && w_q && !s_bvalid;

  assign cfg_entry = '{hit: comm0_q[17], group_size: comm0_q[15:0], cgra_en: comm0_q[16],
                       mcast_mask: comm1_q[MAX_PIPES-1:0]};

  function automatic logic [31:0] rd_reg(logic [7:0] a);
    logic [31:0] v;
    v = '0;
    if (a == 8'h04) v = {30'd0, loaded_q, load_busy};
    else if (a == 8'h40) v = comm0_q;
    else if (a == 8'h44) v = comm1_q;
    for (int s = 0; s < NUM_SPU; s++) begin
      if (a == 8'(8'h10 + 8 * s)) v = prog_base[s];
      if (a == 8'(8'h14 + 8 * s)) v = 32'(prog_len[s]);
    end
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_q <= 1'b0; w_q <= 1'b0; awaddr_q <= '0; wdata_q <= '0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      load_start <= 1'b0; loaded_q <= 1'b0;
      comm0_q <= '0; comm1_q <= '0;
      cfg_we <= 1'b0; cfg_idx <= '0;
      for (int s = 0; s < NUM_SPU; s++) begin
        prog_base[s] <= '0;
        prog_len[s]  <= '0;
      end
    end else begin
      load_start <= 1'b0;
      cfg_we     <= 1'b0;
      if (load_done) loaded_q <= 1'b1;
      if (s_awvalid && s_awready) begin aw_q <= 1'b1; awaddr_q <= s_awaddr; end
      if (s_wvalid && s_wready)   begin w_q  <= 1'b1; wdata_q  <= s_wdata;  end
      if (do_write) begin
        aw_q <= 1'b0; w_q <= 1'b0; s_bvalid <= 1'b1;
        unique case (awaddr_q)
          8'h00: if (wdata_q[0]) begin load_start <= 1'b1; loaded_q <= 1'b0; end
          8'h40: comm0_q <= wdata_q;
          8'h44: comm1_q <= wdata_q;
          8'h48: begin cfg_we <= 1'b1; cfg_idx <= wdata_q[$clog2(NUM_COMM)-1:0]; end
          default: ;
        endcase
        for (int s = 0; s < NUM_SPU; s++) begin
          if (awaddr_q == 8'(8'h10 + 8 * s)) prog_base[s] <= wdata_q;
          if (awaddr_q == 8'(8'h14 + 8 * s)) prog_len[s]  <= (PW+1)'(wdata_q);
        end
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_reg(s_araddr);
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once offered, stays until taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
