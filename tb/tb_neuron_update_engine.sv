// tb_neuron_update_engine: runs several timesteps over 16 neurons with
// behavioural state and weight-sum arrays and random stalls from the TS
// Manager side. Each handshake is compared with a reference LIF step
// (ids in order, fire decision, new potential, weight sum cleared). Without
// stalls one timestep must take exactly N cycles.
//
// The engine is driven through ts_start, with its upd_valid/upd_ready
// handshake against a random-ready model. The LIF model and its shift leak are
// this design's choice within the published neuron update engine.
module tb_neuron_update_engine;
  import unispike_pkg::*;
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end
  localparam int N = 16;
  logic start, done, st_we, ws_clear, upd_valid, upd_fired, upd_ready;
  logic [3:0] st_addr, ws_addr, upd_id;
  neuron_state_t st_rdata, st_wdata;
  logic signed [WS_W-1:0] ws_rdata;
  neuron_state_t st [N];
  logic signed [WS_W-1:0] ws [N];
  int expect_id, stall_on, n_fired;

  neuron_update_engine #(.N_NEURONS(N)) dut (.*);

  assign st_rdata = st[st_addr];
  assign ws_rdata = ws[ws_addr];
  always @(negedge clk) upd_ready = stall_on ? ($urandom % 2) : 1'b1;

  always @(posedge clk) if (rst_n && upd_valid && upd_ready) begin
    int v, vn;
    bit f;
    v  = int'(st[upd_id].v);
    vn = v + int'(ws[upd_id]);
    if (st[upd_id].leak != 0) vn = vn - (v >>> st[upd_id].leak);
    f = (vn >= int'(st[upd_id].vth));
    if (f) vn = 0;
    chk(int'(upd_id) == expect_id, "neurons in order");
    chk(upd_fired == f, $sformatf("fire decision of neuron %0d", upd_id));
    chk(st_we && ws_clear, "write-back and clear");
    chk(int'(st_wdata.v) == vn && st_wdata.vth == st[upd_id].vth, "new state");
    if (f) n_fired++;
    expect_id++;
    st[upd_id] <= st_wdata;
    ws[upd_id] <= '0;
  end

  initial begin
    int cyc;
    start = 0; stall_on = 0; n_fired = 0;
    for (int i = 0; i < N; i++) begin
      st[i].v = 24'(int'($urandom % 200) - 50); st[i].vth = 16'(100 + $urandom % 100);
      st[i].leak = 4'($urandom % 5); st[i].rsvd = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      stall_on = (t % 2);
      for (int i = 0; i < N; i++) ws[i] = 16'(int'($urandom % 150) - 30);
      expect_id = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(expect_id == N, "all neurons updated");
      if (!stall_on) chk(cyc == N + 1, $sformatf("timestep took %0d cycles", cyc));
      for (int i = 0; i < N; i++) chk(ws[i] == 0, "weight sums cleared");
    end
    chk(n_fired > 0, "some neurons fired");
    finish_tb();
  end
endmodule
