// tb_unispike_ei_network: a scaled-down excitatory/inhibitory LIF network of the kind
// used as neuroscience benchmarks (Brunel, Vogels): 6 cores x 32 neurons, 80 %
// excitatory, 10 % random all-to-all connectivity across cores, inhibitory
// weights four times the excitatory ones.
//
// A random spiking network is built over the active cores and compiled by
// the reference model in snn_ref_pkg (checking tables by the destination-
// sorting algorithm, execution-order renumbering, synapse tables). It is
// loaded through the configuration port and run for 12 timesteps. After
// every timestep the firing neurons of every active core are compared with
// the reference, and so are the numbers of packets, payload flits, skipped
// destinations, barriers reached and spikes received. Counted mechanisms:
// barrier-triggered dispatch, update-engine stall at a barrier, address
// merging (a packet with several payload flits), skipped empty destinations,
// multi-hop delivery. The flit count is compared with what one packet per
// spike would need.
//
// Configuration takes one word per clock, and each timestep runs from a
// step_start pulse to step_done. The network model, the checking-table
// compiler and the mechanisms counted follow the published scheme. The random
// network and its sizes are test choices.
module tb_unispike_ei_network;
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
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end

  localparam int MX = 3, MY = 2, NC = MX * MY, N = 32;
  localparam int CW = (NC > 1) ? $clog2(NC) : 1;
  localparam int DW = 1 + COORD_W + N;

  logic cfg_valid, step_start, step_done, busy, decode_error;
  logic [CW-1:0] cfg_core;
  cfg_sel_e cfg_sel;
  logic [CFG_AW-1:0] cfg_addr;
  logic [DW-1:0] cfg_data;
  logic [31:0] ts_count, cnt_packets, cnt_payload, cnt_barriers, cnt_stalls, cnt_empty_dest, cnt_spikes_in;
  logic [NC-1:0] fire_valid;
  logic [$clog2(N)-1:0] fire_id [NC];
  bit got_fire [];

  unispike_system #(.MESH_X(3), .MESH_Y(2), .N_NEURONS(32), .CT_DEPTH(32), .CONN_DEPTH(32), .AXON_DEPTH(256), .SYN_DEPTH(1024)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (fire_valid[c]) begin
      int idx;
      idx = c * N;
      idx += fire_id[c];
      got_fire[idx] = 1'b1;
    end
  end

  initial begin
    snn_model m;
    int act[$] = '{0, 1, 2, 3, 4, 5};
    int p0, y0, e0, b0, s0, st0, tot_flits, tot_base, tot_stall, merged_pkts, t_cyc;
    cfg_valid = 0; cfg_core = '0; cfg_sel = CFG_CT; cfg_addr = '0; cfg_data = '0; step_start = 0;
    got_fire = new[NC * N];
    m = new(NC, N, 32, 32, 1024);
    m.build_ei(act, 10, 12, 48);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (m.cfg[i]) begin
      @(negedge clk);
      cfg_valid = 1; cfg_core = CW'(m.cfg[i].core); cfg_sel = m.cfg[i].sel;
      cfg_addr = CFG_AW'(m.cfg[i].addr); cfg_data = DW'(m.cfg[i].data);
    end
    @(negedge clk);
    cfg_valid = 0;
    $display("configured %0d words", m.cfg.size());
    tot_flits = 0; tot_base = 0; merged_pkts = 0;
    for (int t = 0; t < 12; t++) begin
      m.step();
      foreach (got_fire[i]) got_fire[i] = 0;
      p0 = cnt_packets; y0 = cnt_payload; e0 = cnt_empty_dest; b0 = cnt_barriers; s0 = cnt_spikes_in;
      @(negedge clk);
      step_start = 1;
      @(negedge clk);
      step_start = 0; t_cyc = 1;
      while (!step_done) begin @(negedge clk); t_cyc++; end
      foreach (act[k]) for (int n = 0; n < N; n++)
        chk(got_fire[act[k] * N + n] == m.fired[act[k] * N + n],
            $sformatf("t=%0d core %0d neuron %0d fired=%0d expected %0d", t, act[k], n,
                      got_fire[act[k] * N + n], m.fired[act[k] * N + n]));
      chk(int'(cnt_packets - p0) == m.exp_packets, $sformatf("t=%0d packets %0d expected %0d", t, cnt_packets - p0, m.exp_packets));
      chk(int'(cnt_payload - y0) == m.exp_payload, $sformatf("t=%0d payload %0d expected %0d", t, cnt_payload - y0, m.exp_payload));
      chk(int'(cnt_empty_dest - e0) == m.exp_empty, $sformatf("t=%0d empty %0d expected %0d", t, cnt_empty_dest - e0, m.exp_empty));
      chk(int'(cnt_barriers - b0) == m.exp_barriers, $sformatf("t=%0d barriers %0d expected %0d", t, cnt_barriers - b0, m.exp_barriers));
      chk(int'(cnt_spikes_in - s0) == m.exp_payload, "every payload flit received once");
      tot_flits += m.exp_packets + m.exp_payload;
      tot_base  += m.baseline_flits;
      if (m.exp_payload > m.exp_packets) merged_pkts++;
      $display("t=%0d cycles=%0d packets=%0d payload=%0d empty=%0d (one-packet-per-spike flits %0d)",
               t, t_cyc, m.exp_packets, m.exp_payload, m.exp_empty, m.baseline_flits);
    end
    chk(ts_count == 32'(12), "timestep count");
    chk(!decode_error, "no stray payload flit");
    // every mechanism must have happened
    chk(cnt_barriers > 0, "barrier dispatch happened");
    chk(cnt_stalls > 0, $sformatf("barrier stall happened (%0d cycles)", cnt_stalls));
    chk(merged_pkts > 0, "address merging happened");
    chk(cnt_empty_dest > 0, "empty destination skipped");
    chk(tot_flits < tot_base, $sformatf("merged flits %0d < per-spike flits %0d", tot_flits, tot_base));
    $display("mechanisms: barriers=%0d stall_cycles=%0d merged_steps=%0d empty=%0d flits=%0d per_spike_flits=%0d",
             cnt_barriers, cnt_stalls, merged_pkts, cnt_empty_dest, tot_flits, tot_base);
    finish_tb();
  end
endmodule
