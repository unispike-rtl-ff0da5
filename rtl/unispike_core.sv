// unispike_core: one neuro-computing core with destination-centric spike
// transmission.
//
// Receive path: network interface -> spike packet decoder -> weight-sum
// accumulator, which looks up the pre-synaptic weights memory and adds into
// the weight sum memory bank of the next timestep.
// Compute path: on ts_start the neuron update engine updates neurons 0..N-1
// in order, reading the neuron state memory and the current weight-sum bank.
// Send path: each update goes to the TS Manager, which records firings in
// the activation bitmap and, when the neuron is a barrier in the checking
// table, starts the packet generator. The generator sends one address-merged
// packet per destination core whose connected neurons fired, through the
// network interface's injection queue.
//
// Interface: `src_coord` is this core's mesh coordinate. `ts_done` is high
// when the timestep's updates are finished, no packet is being generated,
// the network interface is empty and the receive path is idle. Configuration
// writes (`cfg_*`, one word per cycle) load the memories before operation;
// the layout of `cfg_data` per target is given in unispike_pkg/cfg_sel_e and
// below. The event outputs are single-cycle pulses for monitoring.
// `noc_tx_vc` is the virtual channel of the offered flit; `noc_tx_ready`
// must be the router's ready for that VC.
// Block structure and connections follow the published core; the
// configuration port, weight-sum double banking and handshakes are this
// design's choice.
module unispike_core
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned CT_DEPTH   = 512,
  parameter int unsigned CONN_DEPTH = 512,
  parameter int unsigned N_SRC      = 512,
  parameter int unsigned AXON_DEPTH = 4096,
  parameter int unsigned SYN_DEPTH  = 40960,
  parameter int unsigned NI_DEPTH   = 4,
  localparam int unsigned NEUR_W    = $clog2(N_NEURONS),
  localparam int unsigned CT_AW     = $clog2(CT_DEPTH),
  localparam int unsigned CONN_AW   = $clog2(CONN_DEPTH),
  localparam int unsigned AXON_AW   = $clog2(AXON_DEPTH),
  localparam int unsigned SYN_AW    = $clog2(SYN_DEPTH),
  localparam int unsigned LEN_W     = NEUR_W + 1,
  localparam int unsigned CFG_DW    = 1 + COORD_W + N_NEURONS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] src_coord,
  // timestep control
  input  logic               ts_start,
  output logic               ts_done,
  // configuration
  input  logic               cfg_valid,
  input  cfg_sel_e           cfg_sel,
  input  logic [CFG_AW-1:0]  cfg_addr,
  input  logic [CFG_DW-1:0]  cfg_data,
  // router local port
  output logic               noc_tx_valid,
  output logic [FLIT_W-1:0]  noc_tx_flit,
  output logic [VC_W-1:0]    noc_tx_vc,
  input  logic               noc_tx_ready,
  input  logic               noc_rx_valid,
  input  logic [FLIT_W-1:0]  noc_rx_flit,
  output logic               noc_rx_ready,
  // monitoring
  output logic               fire_valid,
  output logic [NEUR_W-1:0]  fire_id,
  output logic               ev_barrier,
  output logic               ev_stall,
  output logic               ev_packet,
  output logic               ev_payload,
  output logic               ev_empty_dest,
  output logic               ev_spike_in,
  output logic               ev_decode_err
);
  // ---------------- configuration decode ----------------
  logic ct_we, conn_we, base_we, axon_we, syn_we, ns_we;
  assign ct_we   = cfg_valid && (cfg_sel == CFG_CT);
  assign conn_we = cfg_valid && (cfg_sel == CFG_CONN);
  assign base_we = cfg_valid && (cfg_sel == CFG_AXBASE);
  assign axon_we = cfg_valid && (cfg_sel == CFG_AXON);
  assign syn_we  = cfg_valid && (cfg_sel == CFG_SYN);
  assign ns_we   = cfg_valid && (cfg_sel == CFG_NSTATE);

  // ---------------- timestep bank parity ----------------
  logic parity_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        parity_q <= 1'b0;
    else if (ts_start) parity_q <= ~parity_q;
  end

  // ---------------- network interface ----------------
  logic              pg_fv, pg_fr, rx_v, rx_r, ni_empty;
  logic [FLIT_W-1:0] pg_f, rx_f;

  network_interface #(.DEPTH(NI_DEPTH)) u_ni (
    .clk, .rst_n,
    .core_tx_valid(pg_fv), .core_tx_flit(pg_f), .core_tx_ready(pg_fr),
    .noc_tx_valid, .noc_tx_flit, .noc_tx_vc, .noc_tx_ready,
    .noc_rx_valid, .noc_rx_flit, .noc_rx_ready,
    .core_rx_valid(rx_v), .core_rx_flit(rx_f), .core_rx_ready(rx_r),
    .empty(ni_empty)
  );

  // ---------------- receive path ----------------
  logic               spk_v, spk_r, dec_in_pkt;
  logic [COORD_W-1:0] spk_src, lk_src;
  logic [SYNID_W-1:0] spk_syn, lk_syn;

  spike_packet_decoder u_dec (
    .clk, .rst_n,
    .flit_valid(rx_v), .flit(rx_f), .flit_ready(rx_r),
    .spk_valid(spk_v), .spk_src, .spk_syn, .spk_ready(spk_r),
    .in_packet(dec_in_pkt), .err(ev_decode_err)
  );

  logic [SYN_AW-1:0]          lk_ptr, syn_addr;
  logic [LEN_W-1:0]           lk_len;
  logic [NEUR_W-1:0]          syn_neuron, acc_addr;
  logic signed [WEIGHT_W-1:0] syn_weight;
  logic signed [WS_W-1:0]     acc_rdata, acc_wdata;
  logic                       acc_we, wsa_busy;

  presyn_weight_mem #(.N_NEURONS(N_NEURONS), .N_SRC(N_SRC), .AXON_DEPTH(AXON_DEPTH),
                      .SYN_DEPTH(SYN_DEPTH)) u_wmem (
    .clk,
    .cfg_base_we(base_we), .cfg_axon_we(axon_we), .cfg_syn_we(syn_we), .cfg_addr,
    .cfg_base(cfg_data[AXON_AW-1:0]),
    .cfg_ptr(cfg_data[SYN_AW-1:0]), .cfg_len(cfg_data[SYN_AW +: LEN_W]),
    .cfg_neuron(cfg_data[WEIGHT_W +: NEUR_W]), .cfg_weight(cfg_data[WEIGHT_W-1:0]),
    .src_core(lk_src), .syn_id(lk_syn), .axon_ptr(lk_ptr), .axon_len(lk_len),
    .syn_addr, .syn_neuron, .syn_weight
  );

  weight_sum_accumulator #(.N_NEURONS(N_NEURONS), .SYN_DEPTH(SYN_DEPTH)) u_wsa (
    .clk, .rst_n,
    .spk_valid(spk_v), .spk_src, .spk_syn, .spk_ready(spk_r),
    .lk_src, .lk_syn, .lk_ptr, .lk_len,
    .syn_addr, .syn_neuron, .syn_weight,
    .ws_addr(acc_addr), .ws_rdata(acc_rdata), .ws_we(acc_we), .ws_wdata(acc_wdata),
    .busy(wsa_busy)
  );
  assign ev_spike_in = spk_v && spk_r;

  // ---------------- compute path ----------------
  logic [NEUR_W-1:0]      nue_ws_addr, st_addr;
  logic signed [WS_W-1:0] nue_ws;
  logic                   nue_clear, st_we, nue_done;
  neuron_state_t          st_rdata, st_wdata;

  weight_sum_mem #(.N_NEURONS(N_NEURONS)) u_ws (
    .clk, .rst_n, .parity(parity_q),
    .acc_addr, .acc_rdata, .acc_we, .acc_wdata,
    .nue_addr(nue_ws_addr), .nue_rdata(nue_ws), .nue_clear
  );

  neuron_state_mem #(.N_NEURONS(N_NEURONS)) u_nsm (
    .clk,
    .cfg_we(ns_we), .cfg_addr(NEUR_W'(cfg_addr)), .cfg_wdata(neuron_state_t'(cfg_data[NSTATE_W-1:0])),
    .rd_addr(st_addr), .rd_data(st_rdata),
    .wr_en(st_we), .wr_addr(st_addr), .wr_data(st_wdata)
  );

  logic              upd_v, upd_f, upd_r;
  logic [NEUR_W-1:0] upd_id;

  neuron_update_engine #(.N_NEURONS(N_NEURONS)) u_nue (
    .clk, .rst_n, .start(ts_start), .done(nue_done),
    .st_addr, .st_rdata, .st_we, .st_wdata,
    .ws_addr(nue_ws_addr), .ws_rdata(nue_ws), .ws_clear(nue_clear),
    .upd_valid(upd_v), .upd_id, .upd_fired(upd_f), .upd_ready(upd_r)
  );

  assign fire_valid = upd_v && upd_r && upd_f;
  assign fire_id    = upd_id;

  // ---------------- send path ----------------
  logic                 pg_start, pg_ready;
  logic [CONN_AW-1:0]   pg_addr;
  logic [N_NEURONS-1:0] act_bitmap;

  ts_manager #(.N_NEURONS(N_NEURONS), .CT_DEPTH(CT_DEPTH), .CONN_DEPTH(CONN_DEPTH)) u_tsm (
    .clk, .rst_n, .ts_start,
    .upd_valid(upd_v), .upd_id, .upd_fired(upd_f), .upd_ready(upd_r),
    .pg_start, .pg_start_addr(pg_addr), .pg_ready, .act_bitmap, .stall(ev_stall),
    .ct_we, .ct_addr(CT_AW'(cfg_addr)),
    .ct_valid(cfg_data[NEUR_W + CONN_AW]),
    .ct_barrier(cfg_data[CONN_AW +: NEUR_W]),
    .ct_start(cfg_data[CONN_AW-1:0])
  );
  assign ev_barrier = pg_start;

  packet_generator #(.N_NEURONS(N_NEURONS), .CONN_DEPTH(CONN_DEPTH)) u_pg (
    .clk, .rst_n, .src_coord,
    .start(pg_start), .start_addr(pg_addr), .ready(pg_ready), .act_bitmap,
    .flit_valid(pg_fv), .flit(pg_f), .flit_ready(pg_fr),
    .ev_packet, .ev_empty_dest,
    .cfg_we(conn_we), .cfg_addr(CONN_AW'(cfg_addr)),
    .cfg_flag(cfg_data[COORD_W + N_NEURONS]),
    .cfg_dst(cfg_data[N_NEURONS +: COORD_W]),
    .cfg_bitmap(cfg_data[N_NEURONS-1:0])
  );
  body_flit_t pg_b;
  assign pg_b       = body_flit_t'(pg_f);
  assign ev_payload = pg_fv && pg_fr && (pg_b.ftype != FLIT_HEAD);

  assign ts_done = nue_done && pg_ready && ni_empty && !wsa_busy && !dec_in_pkt;
endmodule
