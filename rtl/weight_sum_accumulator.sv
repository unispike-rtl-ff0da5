// weight_sum_accumulator: adds the weights of each incoming spike into the
// weight sums of the local neurons it reaches.
//
// A spike (source core, source neuron id) is accepted in IDLE in one cycle;
// its synapse run {pointer, length} is looked up in the pre-synaptic weights
// memory at that moment. In RUN the accumulator handles one synapse per
// cycle: it reads {neuron, weight}, reads that neuron's weight sum and
// writes back the sum plus the sign-extended weight (saturating at the WS_W
// limits). A spike with L synapses therefore occupies the accumulator for L
// cycles after the accepting cycle; a spike with no synapse for none.
// The published core only names this block; the read-modify-write loop and
// saturation are this design's choice.
module weight_sum_accumulator
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS = 512,
  parameter int unsigned SYN_DEPTH = 40960,
  localparam int unsigned NEUR_W   = $clog2(N_NEURONS),
  localparam int unsigned SYN_AW   = $clog2(SYN_DEPTH),
  localparam int unsigned LEN_W    = NEUR_W + 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // spike events from the decoder
  input  logic                       spk_valid,
  input  logic [COORD_W-1:0]         spk_src,
  input  logic [SYNID_W-1:0]         spk_syn,
  output logic                       spk_ready,
  // pre-synaptic weights memory
  output logic [COORD_W-1:0]         lk_src,
  output logic [SYNID_W-1:0]         lk_syn,
  input  logic [SYN_AW-1:0]          lk_ptr,
  input  logic [LEN_W-1:0]           lk_len,
  output logic [SYN_AW-1:0]          syn_addr,
  input  logic [NEUR_W-1:0]          syn_neuron,
  input  logic signed [WEIGHT_W-1:0] syn_weight,
  // weight sum memory (bank of the next timestep)
  output logic [NEUR_W-1:0]          ws_addr,
  input  logic signed [WS_W-1:0]     ws_rdata,
  output logic                       ws_we,
  output logic signed [WS_W-1:0]     ws_wdata,
  output logic                       busy
);
  logic [SYN_AW-1:0] ptr_q;
  logic [LEN_W-1:0]  left_q;
  logic signed [WS_W:0] sum;

  localparam logic signed [WS_W:0] WS_MAX = {2'b00, {(WS_W-1){1'b1}}};
  localparam logic signed [WS_W:0] WS_MIN = {2'b11, {(WS_W-1){1'b0}}};

  assign busy      = (left_q != '0);
  assign spk_ready = !busy;
  assign lk_src    = spk_src;
  assign lk_syn    = spk_syn;

  assign syn_addr = ptr_q;
  assign ws_addr  = syn_neuron;
  assign ws_we    = busy;
  assign sum      = (WS_W+1)'(ws_rdata) + (WS_W+1)'(syn_weight);

  always_comb begin
    if (sum > WS_MAX)      ws_wdata = WS_W'(WS_MAX);
    else if (sum < WS_MIN) ws_wdata = WS_W'(WS_MIN);
    else                   ws_wdata = WS_W'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q  <= '0;
      left_q <= '0;
    end else if (busy) begin
      ptr_q  <= ptr_q + 1'b1;
      left_q <= left_q - 1'b1;
    end else if (spk_valid) begin
      ptr_q  <= lk_ptr;
      left_q <= lk_len;
    end
  end
endmodule
