// acis_pkg: types and constants shared by the ACiS payload pipeline and its CGRA.
//
// A payload stream moves one "beat" per handshake: LANES 32-bit words plus a
// last flag. The first beat of every packet on the switch side is a payload
// header carrying the MPI fields (communicator, collective, operation, datatype,
// ranks, tag, length). Inside the pipeline the header is removed by the parser
// and travels beside every data beat as metadata (meta_t) together with the
// communicator context found by the collective control table (ctl_t).
//
// The lane count (3) follows the three PEs drawn in each vector PE of the CGRA
// figure; the word width, header layout and all encodings are this design's own.
package acis_pkg;

  localparam int unsigned LANES  = 3;    // words per beat = PEs per vector PE
  localparam int unsigned WORD_W = 32;
  localparam int unsigned MAX_PIPES = 8; // width of the multicast mask

  typedef logic [WORD_W-1:0]            word_t;
  typedef logic [LANES-1:0][WORD_W-1:0] vec_t;

  typedef struct packed {
    vec_t data;
    logic last;
  } beat_t;

  // Collective kind carried in the header.
  typedef enum logic [3:0] {
    COLL_PASS   = 4'd0,  // no aggregation: forward (bcast, point-to-point)
    COLL_REDUCE = 4'd1,  // element-wise reduction over the group
    COLL_GATHER = 4'd2   // rank-ordered concatenation over the group
  } coll_e;

  // Reduction operators (MPI_Op subset).
  typedef enum logic [3:0] {
    OP_SUM  = 4'd0,
    OP_PROD = 4'd1,
    OP_MAX  = 4'd2,
    OP_MIN  = 4'd3,
    OP_BAND = 4'd4,
    OP_BOR  = 4'd5,
    OP_BXOR = 4'd6
  } redop_e;

  typedef enum logic [3:0] {
    DT_INT32  = 4'd0,
    DT_UINT32 = 4'd1
  } dtype_e;

  // Payload header fields (first beat of a packet):
  //   word0[31:24] comm_id  word0[23:20] coll  word0[19:16] op
  //   word0[15:12] dtype    word0[0]     acis (1: process, 0: payload bypass)
  //   word1[31:16] src_rank word1[15:0]  tag
  //   word2[31:16] nbeats   word2[15:0]  dst_rank
  typedef struct packed {
    logic [7:0]  comm_id;
    coll_e       coll;
    redop_e      op;
    dtype_e      dtype;
    logic [15:0] src_rank;
    logic [15:0] tag;
    logic [15:0] nbeats;   // data beats after the header
    logic [15:0] dst_rank;
  } meta_t;

  // Communicator context from the collective control lookup table.
  typedef struct packed {
    logic                 hit;        // table entry valid
    logic [15:0]          group_size; // contributions per collective
    logic                 cgra_en;    // run the result through the CGRA
    logic [MAX_PIPES-1:0] mcast_mask; // pipes that receive the result
  } ctl_t;

  // Beat with sideband, as it moves between parser and deparser.
  typedef struct packed {
    meta_t meta;
    ctl_t  ctl;
    beat_t beat;
  } mbeat_t;

  // Beat with its multicast mask, between deparser and multicast engine.
  typedef struct packed {
    logic [MAX_PIPES-1:0] mask;
    beat_t                beat;
  } mcbeat_t;

  // Simplified AXI-MM channels of the HBM read / write masters.
  typedef logic [31:0] addr_t;   // address in beats
  typedef struct packed {
    addr_t addr;
    vec_t  data;
  } wr_req_t;

  function automatic vec_t pack_header(meta_t m);
    vec_t h;
    h[0] = {m.comm_id, m.coll, m.op, m.dtype, 11'd0, 1'b1};
    h[1] = {m.src_rank, m.tag};
    h[2] = {m.nbeats, m.dst_rank};
    return h;
  endfunction

  function automatic meta_t unpack_header(vec_t h);
    meta_t m;
    m.comm_id  = h[0][31:24];
    m.coll     = coll_e'(h[0][23:20]);
    m.op       = redop_e'(h[0][19:16]);
    m.dtype    = dtype_e'(h[0][15:12]);
    m.src_rank = h[1][31:16];
    m.tag      = h[1][15:0];
    m.nbeats   = h[2][31:16];
    m.dst_rank = h[2][15:0];
    return m;
  endfunction

  // ---------------------------------------------------------------------
  // SPU instruction set. Scalar instructions use RV32I/RV32M encodings;
  // vector and stream instructions use the RISC-V custom-0 / custom-1
  // opcode space with the R-type field layout.
  // ---------------------------------------------------------------------
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_VEC    = 7'b0001011; // custom-0
  localparam logic [6:0] OPC_STRM   = 7'b0101011; // custom-1

  // custom-0 funct7 values (funct3[2]=1: second operand is scalar rs2 splat)
  typedef enum logic [6:0] {
    V_ADD = 7'd0, V_SUB = 7'd1, V_MUL = 7'd2, V_MAX = 7'd3, V_MIN = 7'd4,
    V_AND = 7'd5, V_OR  = 7'd6, V_XOR = 7'd7,
    V_SLIDEUP = 7'd8,   // vd = vs1 moved up by rs2-field lanes, zero fill
    V_REDSUM  = 7'd9,   // x[rd] = sum of lanes of vs1
    V_EXT     = 7'd10,  // x[rd] = vs1[lane rs2-field]
    V_SPLAT   = 7'd11,  // vd = {x[rs1], x[rs1], ...}
    V_MAC     = 7'd12   // vd = vd + vs1 * vs2 (fused multiply-accumulate)
  } vop_e;

  // custom-1 funct3 values
  typedef enum logic [2:0] {
    S_POP   = 3'd0,  // vd <- input stream; x31 <- last flag
    S_PUSH  = 3'd1,  // output stream <- vs1, last=0
    S_PUSHL = 3'd2,  // output stream <- vs1, last=1
    S_VLD   = 3'd3,  // vd <- mem[ar[rs1]]; ar[rs1] += 1
    S_VST   = 3'd4,  // mem[ar[rs1]] <- vs2; ar[rs1] += 1
    S_SETA  = 3'd5,  // ar[rd] <- x[rs1]
    S_HALT  = 3'd7   // end of the per-packet program
  } sop_e;

endpackage
