// weight_sum_mem: per-neuron accumulated synaptic input, in two banks.
//
// The bank selected by `parity` belongs to the timestep being computed: the
// neuron update engine reads it and clears each entry it has used. The other
// bank collects the input of spikes arriving during this timestep, which are
// integrated in the next one. Two banks are this design's choice; the
// published core only names a weight sum memory. Reads are combinational,
// writes at the clock edge. Reset zeroes both banks; in operation every entry
// is cleared by the update engine after use.
module weight_sum_mem
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS = 512,
  localparam int unsigned NEUR_W   = $clog2(N_NEURONS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   parity,
  // accumulator port, bank !parity
  input  logic [NEUR_W-1:0]      acc_addr,
  output logic signed [WS_W-1:0] acc_rdata,
  input  logic                   acc_we,
  input  logic signed [WS_W-1:0] acc_wdata,
  // update engine port, bank parity
  input  logic [NEUR_W-1:0]      nue_addr,
  output logic signed [WS_W-1:0] nue_rdata,
  input  logic                   nue_clear
);
  logic signed [WS_W-1:0] bank0 [N_NEURONS];
  logic signed [WS_W-1:0] bank1 [N_NEURONS];

  assign acc_rdata = parity ? bank0[acc_addr] : bank1[acc_addr];
  assign nue_rdata = parity ? bank1[nue_addr] : bank0[nue_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_NEURONS; i++) begin
        bank0[i] <= '0;
        bank1[i] <= '0;
      end
    end else if (parity) begin
      if (acc_we)    bank0[acc_addr] <= acc_wdata;
      if (nue_clear) bank1[nue_addr] <= '0;
    end else begin
      if (acc_we)    bank1[acc_addr] <= acc_wdata;
      if (nue_clear) bank0[nue_addr] <= '0;
    end
  end
endmodule
