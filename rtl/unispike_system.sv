// unispike_system: a MESH_X x MESH_Y neuromorphic system built from UniSpike
// cores, one router per core, and a global timestep barrier.
//
// Core (x, y) has coordinate y * MESH_X + x and attaches to the local port
// of its router; routers connect to their four neighbours (port 1 <-> x+1,
// port 2 <-> x-1, port 3 <-> y+1, port 4 <-> y-1). Edge ports are tied off.
// A timestep is run by pulsing `step_start`: every core updates its neurons
// and sends its address-merged packets; `step_done` pulses once all cores
// are finished and the network has drained, so spikes of timestep t are
// integrated by their targets in timestep t+1.
//
// Configuration: while idle, one word per cycle is written into core
// `cfg_core` (target `cfg_sel`, word `cfg_addr`, data `cfg_data`, layouts in
// unispike_core). Monitoring: `fire_valid[c]`/`fire_id[c]` pulse for every
// neuron that fires; the `cnt_*` outputs count, since reset, packets
// (head flits), payload flits, barriers reached, cycles a barrier stalled the
// update engine, destinations skipped for lack of active neurons and spike
// events received; `decode_error` is sticky.
// Router links carry a flit with its virtual channel number forward and a
// per-VC ready vector back; a core injects on the VC of its current packet
// and ejects from any VC.
// 512 cores, a 2D mesh, XY routing and 4 virtual channels follow the
// published system. The 32 x 16 shape, the single clock (the published cores
// and network run at 500 and 160 MHz), and the timestep barrier mechanism
// are this design's choices. Lint reports rst_n as used both synchronously
// and asynchronously: every flip-flop resets asynchronously, and the
// synchronous use is the `disable iff` of the handshake assertions.
module unispike_system
  import unispike_pkg::*;
#(
  parameter int unsigned MESH_X     = 32,
  parameter int unsigned MESH_Y     = 16,
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned CT_DEPTH   = 512,
  parameter int unsigned CONN_DEPTH = 512,
  parameter int unsigned AXON_DEPTH = 4096,
  parameter int unsigned SYN_DEPTH  = 40960,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NUM_CORES = MESH_X * MESH_Y,
  localparam int unsigned CORE_W    = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int unsigned NEUR_W    = $clog2(N_NEURONS),
  localparam int unsigned CFG_DW    = 1 + COORD_W + N_NEURONS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_valid,
  input  logic [CORE_W-1:0]    cfg_core,
  input  cfg_sel_e             cfg_sel,
  input  logic [CFG_AW-1:0]    cfg_addr,
  input  logic [CFG_DW-1:0]    cfg_data,
  // timestep control
  input  logic                 step_start,
  output logic                 step_done,
  output logic                 busy,
  output logic [31:0]          ts_count,
  // monitoring
  output logic [NUM_CORES-1:0] fire_valid,
  output logic [NEUR_W-1:0]    fire_id [NUM_CORES],
  output logic [31:0]          cnt_packets,
  output logic [31:0]          cnt_payload,
  output logic [31:0]          cnt_barriers,
  output logic [31:0]          cnt_stalls,
  output logic [31:0]          cnt_empty_dest,
  output logic [31:0]          cnt_spikes_in,
  output logic                 decode_error    // sticky: a payload flit arrived outside a packet
);
  logic              ts_start;
  logic [NUM_CORES-1:0] core_done, rtr_empty;
  logic [NUM_CORES-1:0] e_err;
  logic [NUM_CORES-1:0] e_barrier, e_stall, e_packet, e_payload, e_empty, e_spk;

  // Router port signals, [core][port].
  logic              r_in_v  [NUM_CORES][NPORTS];
  logic [FLIT_W-1:0] r_in_f  [NUM_CORES][NPORTS];
  logic [VC_W-1:0]   r_in_c  [NUM_CORES][NPORTS];
  logic [NUM_VC-1:0] r_in_r  [NUM_CORES][NPORTS];
  logic              r_out_v [NUM_CORES][NPORTS];
  logic [FLIT_W-1:0] r_out_f [NUM_CORES][NPORTS];
  logic [VC_W-1:0]   r_out_c [NUM_CORES][NPORTS];
  logic [NUM_VC-1:0] r_out_r [NUM_CORES][NPORTS];
  logic [NUM_CORES-1:0] core_rx_r, core_tx_r;

  timestep_sync u_sync (
    .clk, .rst_n, .step_start,
    .all_done((&core_done) && (&rtr_empty)),
    .ts_start, .step_done, .busy, .ts_count
  );

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned C = y * MESH_X + x;

      noc_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .DEPTH(FIFO_DEPTH),
                   .MY_X(x), .MY_Y(y)) u_rtr (
        .clk, .rst_n,
        .in_valid(r_in_v[C]), .in_vc(r_in_c[C]), .in_flit(r_in_f[C]), .in_ready(r_in_r[C]),
        .out_valid(r_out_v[C]), .out_vc(r_out_c[C]), .out_flit(r_out_f[C]), .out_ready(r_out_r[C]),
        .empty(rtr_empty[C])
      );

      unispike_core #(.N_NEURONS(N_NEURONS), .CT_DEPTH(CT_DEPTH), .CONN_DEPTH(CONN_DEPTH),
                      .N_SRC(NUM_CORES), .AXON_DEPTH(AXON_DEPTH), .SYN_DEPTH(SYN_DEPTH),
                      .NI_DEPTH(FIFO_DEPTH)) u_core (
        .clk, .rst_n, .src_coord(COORD_W'(C)),
        .ts_start, .ts_done(core_done[C]),
        .cfg_valid(cfg_valid && cfg_core == CORE_W'(C)), .cfg_sel, .cfg_addr, .cfg_data,
        .noc_tx_valid(r_in_v[C][P_LOCAL]), .noc_tx_flit(r_in_f[C][P_LOCAL]),
        .noc_tx_vc(r_in_c[C][P_LOCAL]), .noc_tx_ready(core_tx_r[C]),
        .noc_rx_valid(r_out_v[C][P_LOCAL]), .noc_rx_flit(r_out_f[C][P_LOCAL]),
        .noc_rx_ready(core_rx_r[C]),
        .fire_valid(fire_valid[C]), .fire_id(fire_id[C]),
        .ev_barrier(e_barrier[C]), .ev_stall(e_stall[C]), .ev_packet(e_packet[C]),
        .ev_payload(e_payload[C]), .ev_empty_dest(e_empty[C]), .ev_spike_in(e_spk[C]),
        .ev_decode_err(e_err[C])
      );

      // The core injects on one VC at a time and ejects from any VC.
      assign core_tx_r[C]          = r_in_r[C][P_LOCAL][r_in_c[C][P_LOCAL]];
      assign r_out_r[C][P_LOCAL]   = {NUM_VC{core_rx_r[C]}};

      // x links: my port XP feeds the XM input of (x+1, y).
      if (x + 1 < MESH_X) begin : g_xp
        assign r_in_v[C+1][P_XM]  = r_out_v[C][P_XP];
        assign r_in_f[C+1][P_XM]  = r_out_f[C][P_XP];
        assign r_in_c[C+1][P_XM]  = r_out_c[C][P_XP];
        assign r_out_r[C][P_XP]   = r_in_r[C+1][P_XM];
        assign r_in_v[C][P_XP]    = r_out_v[C+1][P_XM];
        assign r_in_f[C][P_XP]    = r_out_f[C+1][P_XM];
        assign r_in_c[C][P_XP]    = r_out_c[C+1][P_XM];
        assign r_out_r[C+1][P_XM] = r_in_r[C][P_XP];
      end else begin : g_xp_edge
        assign r_in_v[C][P_XP]    = 1'b0;
        assign r_in_f[C][P_XP]    = '0;
        assign r_in_c[C][P_XP]    = '0;
        assign r_out_r[C][P_XP]   = '1;
      end
      if (x == 0) begin : g_xm_edge
        assign r_in_v[C][P_XM]    = 1'b0;
        assign r_in_f[C][P_XM]    = '0;
        assign r_in_c[C][P_XM]    = '0;
        assign r_out_r[C][P_XM]   = '1;
      end
      // y links: my port YP feeds the YM input of (x, y+1).
      if (y + 1 < MESH_Y) begin : g_yp
        assign r_in_v[C+MESH_X][P_YM]  = r_out_v[C][P_YP];
        assign r_in_f[C+MESH_X][P_YM]  = r_out_f[C][P_YP];
        assign r_in_c[C+MESH_X][P_YM]  = r_out_c[C][P_YP];
        assign r_out_r[C][P_YP]        = r_in_r[C+MESH_X][P_YM];
        assign r_in_v[C][P_YP]         = r_out_v[C+MESH_X][P_YM];
        assign r_in_f[C][P_YP]         = r_out_f[C+MESH_X][P_YM];
        assign r_in_c[C][P_YP]         = r_out_c[C+MESH_X][P_YM];
        assign r_out_r[C+MESH_X][P_YM] = r_in_r[C][P_YP];
      end else begin : g_yp_edge
        assign r_in_v[C][P_YP]    = 1'b0;
        assign r_in_f[C][P_YP]    = '0;
        assign r_in_c[C][P_YP]    = '0;
        assign r_out_r[C][P_YP]   = '1;
      end
      if (y == 0) begin : g_ym_edge
        assign r_in_v[C][P_YM]    = 1'b0;
        assign r_in_f[C][P_YM]    = '0;
        assign r_in_c[C][P_YM]    = '0;
        assign r_out_r[C][P_YM]   = '1;
      end
    end
  end

  // Event counters.
  function automatic logic [31:0] popcount(logic [NUM_CORES-1:0] v);
    logic [31:0] n;
    n = '0;
    for (int unsigned i = 0; i < NUM_CORES; i++) n += 32'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_packets    <= '0;
      cnt_payload    <= '0;
      cnt_barriers   <= '0;
      cnt_stalls     <= '0;
      cnt_empty_dest <= '0;
      cnt_spikes_in  <= '0;
      decode_error   <= 1'b0;
    end else begin
      decode_error   <= decode_error || (|e_err);
      cnt_packets    <= cnt_packets    + popcount(e_packet);
      cnt_payload    <= cnt_payload    + popcount(e_payload);
      cnt_barriers   <= cnt_barriers   + popcount(e_barrier);
      cnt_stalls     <= cnt_stalls     + popcount(e_stall);
      cnt_empty_dest <= cnt_empty_dest + popcount(e_empty);
      cnt_spikes_in  <= cnt_spikes_in  + popcount(e_spk);
    end
  end
endmodule
