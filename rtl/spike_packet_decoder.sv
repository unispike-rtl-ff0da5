// spike_packet_decoder: unpacks incoming spike packets into synapse events.
//
// A small HEAD/BODY/TAIL state machine follows the flit types. The head flit
// only sets the packet's source core. Every body or tail flit produces one
// event (source core, synapse id) for the weight-sum accumulator; a tail
// ends the packet. Address-merged packets simply carry more body flits, so
// the same decoder handles them unchanged, as the published design states.
//
// Timing: flits are accepted with valid/ready. A head flit is consumed in
// one cycle. A body/tail flit is passed straight through as a spike event in
// the same cycle and is consumed when the accumulator takes it (flit_ready =
// spk_ready), so the decoder adds no latency. A body flit arriving outside a
// packet is dropped and flagged on `err` (own choice).
module spike_packet_decoder
  import unispike_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flit_valid,
  input  logic [FLIT_W-1:0]  flit,
  output logic               flit_ready,
  output logic               spk_valid,
  output logic [COORD_W-1:0] spk_src,
  output logic [SYNID_W-1:0] spk_syn,
  input  logic               spk_ready,
  output logic               in_packet,
  output logic               err
);
  head_flit_t         h;
  body_flit_t         b;
  logic [COORD_W-1:0] src_q;
  logic               in_pkt_q;
  logic               is_payload;

  assign h = head_flit_t'(flit);
  assign b = body_flit_t'(flit);
  assign is_payload = (b.ftype == FLIT_BODY) || (b.ftype == FLIT_TAIL);

  // enable (BODY/TAIL) towards the accumulator
  assign spk_valid  = flit_valid && is_payload && in_pkt_q;
  assign spk_src    = src_q;
  assign spk_syn    = b.synapse_id;
  assign flit_ready = spk_valid ? spk_ready : 1'b1;
  assign err        = flit_valid && is_payload && !in_pkt_q;
  assign in_packet  = in_pkt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt_q <= 1'b0;
      src_q    <= '0;
    end else if (flit_valid && flit_ready) begin
      case (h.ftype)
        FLIT_HEAD: begin
          in_pkt_q <= 1'b1;
          src_q    <= h.src;
        end
        FLIT_TAIL: in_pkt_q <= 1'b0;
        default: ;
      endcase
    end
  end
endmodule
