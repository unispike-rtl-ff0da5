// tb_unispike_core: one core whose router port is looped back to itself, so
// every packet it sends is received by its own decoder. A random recurrent
// network of 32 neurons (all synapses local) is compiled by snn_ref_pkg,
// loaded through the configuration port and run for 12 timesteps driven by
// ts_start/ts_done. Each timestep checks the firing neurons, the packet and
// payload flit counts, that every payload flit comes back as one spike, that
// each head flit carries the core's own coordinate as source and
// destination, and that ts_done only rises after the last flit was consumed.
//
// Configuration takes one word per clock. A timestep runs from a ts_start
// pulse to the rise of ts_done. The core structure follows the published
// design; the loopback is a test arrangement only.
module tb_unispike_core;
  import unispike_pkg::*;
  import snn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end

  localparam int N = 32, DW = 1 + COORD_W + N;
  logic ts_start, ts_done, cfg_valid;
  cfg_sel_e cfg_sel;
  logic [CFG_AW-1:0] cfg_addr;
  logic [DW-1:0] cfg_data;
  logic noc_tx_valid, noc_tx_ready, noc_rx_valid, noc_rx_ready;
  logic [VC_W-1:0] noc_tx_vc;
  logic [FLIT_W-1:0] noc_tx_flit, noc_rx_flit;
  logic fire_valid, ev_barrier, ev_stall, ev_packet, ev_payload, ev_empty_dest, ev_spike_in, ev_decode_err;
  logic [4:0] fire_id;
  logic [COORD_W-1:0] src_coord = '0;
  int n_pkt, n_pay, n_spk, n_err;
  bit got [N];

  unispike_core #(.N_NEURONS(N), .CT_DEPTH(32), .CONN_DEPTH(32), .N_SRC(4), .AXON_DEPTH(128),
                  .SYN_DEPTH(1024)) dut (.*);

  // loopback with a random stall
  logic lb_ok;
  always @(negedge clk) lb_ok = ($urandom % 4) != 0;
  assign noc_rx_valid = noc_tx_valid && lb_ok;
  assign noc_rx_flit  = noc_tx_flit;
  assign noc_tx_ready = noc_rx_ready && lb_ok;

  always @(posedge clk) if (rst_n) begin
    head_flit_t h;
    h = head_flit_t'(noc_tx_flit);
    if (fire_valid) got[fire_id] = 1'b1;
    if (ev_packet) n_pkt++;
    if (ev_payload) n_pay++;
    if (ev_spike_in) n_spk++;
    if (ev_decode_err) n_err++;
    if (noc_tx_valid && noc_tx_ready && h.ftype == FLIT_HEAD)
      chk(h.src == src_coord && h.dst == src_coord, "head flit coordinates");
  end

  initial begin
    snn_model m;
    int act[$] = '{0};
    cfg_valid = 0; cfg_sel = CFG_CT; cfg_addr = '0; cfg_data = '0; ts_start = 0;
    n_pkt = 0; n_pay = 0; n_spk = 0; n_err = 0;
    m = new(1, N, N, 32, 1024);
    m.build(act, 1, 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (m.cfg[i]) begin
      @(negedge clk);
      cfg_valid = 1; cfg_sel = m.cfg[i].sel; cfg_addr = CFG_AW'(m.cfg[i].addr); cfg_data = DW'(m.cfg[i].data);
    end
    @(negedge clk);
    cfg_valid = 0;
    for (int t = 0; t < 12; t++) begin
      int p0, y0, s0;
      m.step();
      foreach (got[i]) got[i] = 0;
      p0 = n_pkt; y0 = n_pay; s0 = n_spk;
      @(negedge clk); ts_start = 1;
      @(negedge clk); ts_start = 0;
      chk(!ts_done, "ts_done low after ts_start");
      while (!ts_done) @(negedge clk);
      chk(!noc_tx_valid, "nothing left to send at ts_done");
      for (int n = 0; n < N; n++) chk(got[n] == m.fired[n], $sformatf("t=%0d neuron %0d", t, n));
      chk(n_pkt - p0 == m.exp_packets, $sformatf("t=%0d packets %0d/%0d", t, n_pkt - p0, m.exp_packets));
      chk(n_pay - y0 == m.exp_payload, $sformatf("t=%0d payload %0d/%0d", t, n_pay - y0, m.exp_payload));
      chk(n_spk - s0 == m.exp_payload, "each payload flit received as one spike");
      $display("t=%0d fired payload=%0d packets=%0d", t, m.exp_payload, m.exp_packets);
    end
    chk(n_err == 0, "no decode error");
    chk(n_pay > n_pkt, "address merging happened");
    finish_tb();
  end
endmodule
