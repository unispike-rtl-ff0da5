// checking_table: compile-time map from barrier neurons to the destinations
// that become ready when that neuron has been updated.
//
// Entry i = {valid, barrier neuron id, start address}. Entries are stored in
// execution order, so the neuron counter walks them in sequence. The start
// address points at the first of this barrier's destination entries in the
// post-synaptic connections memory; the run of entries ends at one whose flag
// is set. 512 entries x 18 payload bits match a 1.125 KB table. The valid bit
// (reset to 0) and the configuration write port are own choices.
// Read is combinational (register file); write takes effect at the clock edge.
module checking_table #(
  parameter int unsigned CT_DEPTH   = 512,
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned CONN_DEPTH = 512,
  localparam int unsigned CT_AW     = $clog2(CT_DEPTH),
  localparam int unsigned NEUR_W    = $clog2(N_NEURONS),
  localparam int unsigned CONN_AW   = $clog2(CONN_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [CT_AW-1:0]   cfg_addr,
  input  logic               cfg_valid,
  input  logic [NEUR_W-1:0]  cfg_barrier,
  input  logic [CONN_AW-1:0] cfg_start,
  input  logic [CT_AW-1:0]   rd_idx,
  output logic               rd_valid,
  output logic [NEUR_W-1:0]  rd_barrier,
  output logic [CONN_AW-1:0] rd_start
);
  logic [CT_DEPTH-1:0] valid_q;
  logic [NEUR_W-1:0]   barrier_q [CT_DEPTH];
  logic [CONN_AW-1:0]  start_q   [CT_DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid_q <= '0;
    else if (cfg_we) valid_q[cfg_addr] <= cfg_valid;
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      barrier_q[cfg_addr] <= cfg_barrier;
      start_q[cfg_addr]   <= cfg_start;
    end
  end

  assign rd_valid   = valid_q[rd_idx];
  assign rd_barrier = barrier_q[rd_idx];
  assign rd_start   = start_q[rd_idx];
endmodule
