// ts_manager: Transmission Scheduling Manager. Decides when the spikes of a
// destination core may be sent.
//
// The neuron update engine hands over each finished neuron (id, fired) with a
// valid/ready handshake. A fired neuron is recorded in the activation bitmap.
// The id is compared with the barrier neuron of the checking-table entry the
// neuron counter points at; on a match the packet generator is started at
// that entry's start address and the counter advances. Because all neurons
// connected to those destinations come no later than the barrier in
// execution order, their bits are final at that point.
//
// Timing: a non-barrier neuron is accepted in the cycle it is offered. A
// barrier neuron is accepted only when the packet generator is idle
// (pg_ready); otherwise upd_ready is held low and the engine stalls. The
// bitmap bit and the pg_start pulse take effect together at the accepting
// edge. The comparator, counter, table and bitmap follow the published
// structure; the stall policy is this design's choice.
module ts_manager #(
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned CT_DEPTH   = 512,
  parameter int unsigned CONN_DEPTH = 512,
  localparam int unsigned NEUR_W    = $clog2(N_NEURONS),
  localparam int unsigned CT_AW     = $clog2(CT_DEPTH),
  localparam int unsigned CONN_AW   = $clog2(CONN_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ts_start,       // timestep start: clear state
  // neuron update engine
  input  logic                 upd_valid,
  input  logic [NEUR_W-1:0]    upd_id,
  input  logic                 upd_fired,
  output logic                 upd_ready,
  // packet generator
  output logic                 pg_start,
  output logic [CONN_AW-1:0]   pg_start_addr,
  input  logic                 pg_ready,
  output logic [N_NEURONS-1:0] act_bitmap,
  output logic                 stall,          // barrier waiting for the generator
  // checking table configuration
  input  logic                 ct_we,
  input  logic [CT_AW-1:0]     ct_addr,
  input  logic                 ct_valid,
  input  logic [NEUR_W-1:0]    ct_barrier,
  input  logic [CONN_AW-1:0]   ct_start
);
  logic [CT_AW-1:0]   index;
  logic               e_valid;
  logic [NEUR_W-1:0]  e_barrier;
  logic [CONN_AW-1:0] e_start;
  logic               is_barrier, accept;

  checking_table #(.CT_DEPTH(CT_DEPTH), .N_NEURONS(N_NEURONS), .CONN_DEPTH(CONN_DEPTH)) u_ct (
    .clk, .rst_n,
    .cfg_we(ct_we), .cfg_addr(ct_addr), .cfg_valid(ct_valid),
    .cfg_barrier(ct_barrier), .cfg_start(ct_start),
    .rd_idx(index), .rd_valid(e_valid), .rd_barrier(e_barrier), .rd_start(e_start)
  );

  // The '=' comparator between the neuron in hand and the current barrier.
  assign is_barrier = upd_valid && e_valid && (e_barrier == upd_id);
  assign upd_ready  = !is_barrier || pg_ready;
  assign accept     = upd_valid && upd_ready;
  assign stall      = is_barrier && !pg_ready;

  assign pg_start      = accept && is_barrier;
  assign pg_start_addr = e_start;

  neuron_counter #(.CT_DEPTH(CT_DEPTH)) u_cnt (
    .clk, .rst_n, .clear(ts_start), .incr(pg_start), .index
  );

  activation_bitmap #(.N_NEURONS(N_NEURONS)) u_bm (
    .clk, .rst_n, .clear(ts_start),
    .set_en(accept && upd_fired), .set_idx(upd_id), .bitmap(act_bitmap)
  );
endmodule
