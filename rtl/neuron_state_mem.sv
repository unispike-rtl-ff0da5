// neuron_state_mem: state word of every neuron of the core (membrane
// potential, threshold, leak), 512 x 48 bits = 3 KB by default.
//
// One combinational read port for the update engine, one write port shared
// by the engine and configuration (configuration wins if both write). The
// state layout is defined in unispike_pkg and is this design's choice.
module neuron_state_mem
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS = 512,
  localparam int unsigned NEUR_W   = $clog2(N_NEURONS)
) (
  input  logic              clk,
  input  logic              cfg_we,
  input  logic [NEUR_W-1:0] cfg_addr,
  input  neuron_state_t     cfg_wdata,
  input  logic [NEUR_W-1:0] rd_addr,
  output neuron_state_t     rd_data,
  input  logic              wr_en,
  input  logic [NEUR_W-1:0] wr_addr,
  input  neuron_state_t     wr_data
);
  neuron_state_t mem [N_NEURONS];

  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk) begin
    if (cfg_we)     mem[cfg_addr] <= cfg_wdata;
    else if (wr_en) mem[wr_addr]  <= wr_data;
  end
endmodule
