// presyn_weight_mem: synaptic weights of one core, addressed by incoming
// spikes.
//
// Three tables (a compressed sparse-row layout, this design's choice):
//   axon base  [source core]            -> first axon of that source core
//   axon       [base + source neuron]   -> {pointer, length} of its synapses
//   synapse    [pointer .. pointer+len) -> {local neuron, signed weight}
// Default sizes, 512 x 12 b + 4096 x 26 b + 40960 x 17 b = 98.5 KB, stay
// within the 100.75 KB synapse memory the published core budget gives.
// Reads are combinational; configuration writes take effect at the edge.
module presyn_weight_mem
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned N_SRC      = 512,
  parameter int unsigned AXON_DEPTH = 4096,
  parameter int unsigned SYN_DEPTH  = 40960,
  localparam int unsigned NEUR_W    = $clog2(N_NEURONS),
  localparam int unsigned AXON_AW   = $clog2(AXON_DEPTH),
  localparam int unsigned SYN_AW    = $clog2(SYN_DEPTH),
  localparam int unsigned LEN_W     = NEUR_W + 1
) (
  input  logic                       clk,
  // configuration
  input  logic                       cfg_base_we,
  input  logic                       cfg_axon_we,
  input  logic                       cfg_syn_we,
  input  logic [CFG_AW-1:0]          cfg_addr,
  input  logic [AXON_AW-1:0]         cfg_base,
  input  logic [SYN_AW-1:0]          cfg_ptr,
  input  logic [LEN_W-1:0]           cfg_len,
  input  logic [NEUR_W-1:0]          cfg_neuron,
  input  logic signed [WEIGHT_W-1:0] cfg_weight,
  // axon lookup
  input  logic [COORD_W-1:0]         src_core,
  input  logic [SYNID_W-1:0]         syn_id,
  output logic [SYN_AW-1:0]          axon_ptr,
  output logic [LEN_W-1:0]           axon_len,
  // synapse read
  input  logic [SYN_AW-1:0]          syn_addr,
  output logic [NEUR_W-1:0]          syn_neuron,
  output logic signed [WEIGHT_W-1:0] syn_weight
);
  logic [AXON_AW-1:0]         base_q   [N_SRC];
  logic [SYN_AW-1:0]          ptr_q    [AXON_DEPTH];
  logic [LEN_W-1:0]           len_q    [AXON_DEPTH];
  logic [NEUR_W-1:0]          neuron_q [SYN_DEPTH];
  logic signed [WEIGHT_W-1:0] weight_q [SYN_DEPTH];
  logic [AXON_AW-1:0]         axon;

  always_ff @(posedge clk) begin
    if (cfg_base_we) base_q[$clog2(N_SRC)'(cfg_addr)] <= cfg_base;
    if (cfg_axon_we) begin
      ptr_q[AXON_AW'(cfg_addr)] <= cfg_ptr;
      len_q[AXON_AW'(cfg_addr)] <= cfg_len;
    end
    if (cfg_syn_we) begin
      neuron_q[SYN_AW'(cfg_addr)] <= cfg_neuron;
      weight_q[SYN_AW'(cfg_addr)] <= cfg_weight;
    end
  end

  assign axon       = base_q[$clog2(N_SRC)'(src_core)] + AXON_AW'(syn_id);
  assign axon_ptr   = ptr_q[axon];
  assign axon_len   = len_q[axon];
  assign syn_neuron = neuron_q[syn_addr];
  assign syn_weight = weight_q[syn_addr];
endmodule
