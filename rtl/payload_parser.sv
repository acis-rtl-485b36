// payload_parser: the payload-level parser of the ACiS pipeline. Switch
// parsers work on packet headers, but the MPI fields (ranks, tag, communicator)
// sit in the payload, so the payload gets a parser of its own.
//
// The first beat of each packet is the payload header (layout in acis_pkg).
// If its acis bit is set, the header is consumed, decoded into meta_t and sent
// beside every following data beat on the ACiS output (acis_*). Otherwise the
// whole packet, header included, goes unchanged to the bypass output (byp_*),
// which feeds the payload bypass queue. One beat per cycle, no added latency
// (outputs are combinational from the input beat and a header register). The
// header layout and the steering bit are this design's own.
module payload_parser
  import acis_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  beat_t  in_beat,
  // ACiS path: data beats with metadata
  output logic   acis_valid,
  input  logic   acis_ready,
  output meta_t  acis_meta,
  output beat_t  acis_beat,
  // bypass path: untouched packets
  output logic   byp_valid,
  input  logic   byp_ready,
  output beat_t  byp_beat
);
  typedef enum logic [1:0] {ST_HDR, ST_ACIS, ST_BYP} state_e;
  state_e state;
  meta_t  meta_q;

  always_comb begin
    acis_valid = 1'b0;
    byp_valid  = 1'b0;
    in_ready   = 1'b0;
    acis_meta  = meta_q;
    acis_beat  = in_beat;
    byp_beat   = in_beat;
    unique case (state)
      ST_HDR: begin
        if (in_beat.data[0][0]) in_ready = 1'b1;       // header consumed here
        else begin
          byp_valid = in_valid;
          in_ready  = byp_ready;
        end
      end
      ST_ACIS: begin
        acis_valid = in_valid;
        in_ready   = acis_ready;
      end
      ST_BYP: begin
        byp_valid = in_valid;
        in_ready  = byp_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_HDR;
      meta_q <= '0;
    end else if (in_valid && in_ready) begin
      unique case (state)
        ST_HDR: begin
          if (in_beat.data[0][0]) begin
            meta_q <= unpack_header(in_beat.data);
            state  <= in_beat.last ? ST_HDR : ST_ACIS;   // header-only: nothing to do
          end else begin
            state  <= in_beat.last ? ST_HDR : ST_BYP;
          end
        end
        default: if (in_beat.last) state <= ST_HDR;
      endcase
    end
  end
endmodule
