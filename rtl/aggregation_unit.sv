// aggregation_unit: the programmable aggregation unit. It combines the
// contributions of all members of a communicator, arriving from this pipe and
// from other pipes, into one result packet.
//
//  * COLL_REDUCE: beat i of every contribution is combined element-wise into
//    buffer entry i with the packet's operator (sum, prod, max, min, and, or,
//    xor) and datatype (int32 or uint32; signedness matters for max/min). The
//    first contribution is written, later ones read-modify-write the entry.
//  * COLL_GATHER: contribution of rank r (src_rank) is written at entries
//    r*nbeats .. r*nbeats+nbeats-1, so the result is in rank order whatever the
//    arrival order (the "reordering" of gather-type operations).
//  * COLL_PASS, or a communicator without a table entry (ctl.hit=0): the packet
//    is forwarded unchanged.
// A per-communicator counter counts contributions; when it reaches
// ctl.group_size the buffer is streamed out (one beat per cycle) as a packet of
// nbeats (reduce) or nbeats*group_size (gather) beats, and the counter clears.
// Each communicator owns AGG_BEATS buffer entries, so collectives on different
// communicators may be in progress together. Input is accepted one beat per
// cycle and is held off while a result is being sent.
//
// The paper gives the function (programmable operations and datatypes, reduce
// and gather-type aggregation across pipes); buffer organisation, operator set,
// sizes and timing are this design's choices.
module aggregation_unit
  import acis_pkg::*;
#(
  parameter int unsigned NUM_COMM  = 8,
  parameter int unsigned AGG_BEATS = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  mbeat_t in_data,
  output logic   out_valid,
  input  logic   out_ready,
  output mbeat_t out_data,
  // event counters' strobes
  output logic   ev_reduce_done,
  output logic   ev_gather_done
);
  localparam int unsigned CW = $clog2(NUM_COMM);
  localparam int unsigned BW = $clog2(AGG_BEATS);
  localparam int unsigned DEPTH = NUM_COMM * AGG_BEATS;
  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [1:0] {ST_IN, ST_EMIT} state_e;

  vec_t        buf_q [DEPTH];
  logic [15:0] cnt_q [NUM_COMM];
  state_e      state;
  logic [15:0] bi_q;          // beat index within the incoming packet
  logic [15:0] ei_q;          // beat index of the result being sent
  logic [15:0] elen_q;        // result length in beats
  logic [CW-1:0] ecomm_q;
  meta_t       emeta_q;
  ctl_t        ectl_q;

  meta_t m;
  ctl_t  c;
  logic [CW-1:0] comm;
  logic  agg;                 // this packet is aggregated
  logic [31:0] idx;           // entry index within the communicator's area
  logic [AW-1:0] waddr, raddr;
  logic  in_range;
  vec_t  old_v, new_v;
  logic  first;

  assign m    = in_data.meta;
  assign c    = in_data.ctl;
  assign comm = m.comm_id[CW-1:0];
  assign agg  = c.hit && (m.coll == COLL_REDUCE || m.coll == COLL_GATHER);
  assign idx  = (m.coll == COLL_GATHER) ? 32'(m.src_rank) * 32'(m.nbeats) + 32'(bi_q)
                                        : 32'(bi_q);
  assign in_range = idx < AGG_BEATS;
  assign waddr = AW'(comm) * AW'(AGG_BEATS) + AW'(idx[BW-1:0]);
  assign first = cnt_q[comm] == '0;
  assign old_v = buf_q[waddr];

  function automatic word_t combine(redop_e op, dtype_e dt, word_t a, word_t b);
    logic sgn;
    logic a_gt;
    sgn  = (dt == DT_INT32);
    a_gt = sgn ? ($signed(a) > $signed(b)) : (a > b);
    unique case (op)
      OP_SUM:  return a + b;
      OP_PROD: return a * b;
      OP_MAX:  return a_gt ? a : b;
      OP_MIN:  return a_gt ? b : a;
      OP_BAND: return a & b;
      OP_BOR:  return a | b;
      OP_BXOR: return a ^ b;
      default: return a + b;
    endcase
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (m.coll == COLL_GATHER || first) new_v[l] = in_data.beat.data[l];
      else new_v[l] = combine(m.op, m.dtype, old_v[l], in_data.beat.data[l]);
    end
  end

  // Input side
  assign in_ready = (state == ST_IN) && (!agg ? out_ready : 1'b1);

  // Output: forwarded packets in ST_IN, results in ST_EMIT
  assign raddr = AW'(ecomm_q) * AW'(AGG_BEATS) + AW'(ei_q[BW-1:0]);
  always_comb begin
    out_valid = 1'b0;
    out_data  = in_data;
    if (state == ST_IN) begin
      out_valid = in_valid && !agg;
    end else begin
      out_valid           = 1'b1;
      out_data.meta       = emeta_q;
      out_data.meta.nbeats = elen_q;
      out_data.ctl        = ectl_q;
      out_data.beat.data  = buf_q[raddr];
      out_data.beat.last  = (ei_q == elen_q - 16'd1);
    end
  end

  wire take     = in_valid && in_ready && agg;
  wire complete = take && in_data.beat.last && (cnt_q[comm] + 16'd1 >= c.group_size);

  always_ff @(posedge clk) begin
    if (take && in_range) buf_q[waddr] <= new_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IN;
      bi_q    <= '0;
      ei_q    <= '0;
      elen_q  <= '0;
      ecomm_q <= '0;
      emeta_q <= '0;
      ectl_q  <= '0;
      for (int i = 0; i < NUM_COMM; i++) cnt_q[i] <= '0;
    end else begin
      if (take) begin
        bi_q <= in_data.beat.last ? '0 : bi_q + 16'd1;
        if (in_data.beat.last) begin
          cnt_q[comm] <= complete ? '0 : cnt_q[comm] + 16'd1;
        end
        if (complete) begin
          state   <= ST_EMIT;
          ei_q    <= '0;
          elen_q  <= (m.coll == COLL_GATHER) ? 16'(32'(m.nbeats) * 32'(c.group_size))
                                             : m.nbeats;
          ecomm_q <= comm;
          emeta_q <= m;
          ectl_q  <= c;
        end
      end
      if (state == ST_EMIT && out_ready) begin
        if (ei_q == elen_q - 16'd1) state <= ST_IN;
        ei_q <= ei_q + 16'd1;
      end
    end
  end

  assign ev_reduce_done = complete && (m.coll == COLL_REDUCE);
  assign ev_gather_done = complete && (m.coll == COLL_GATHER);

  // A contribution must fit in its communicator's buffer area.
  a_fits: assert property (@(posedge clk) disable iff (!rst_n) take |-> in_range);
endmodule
