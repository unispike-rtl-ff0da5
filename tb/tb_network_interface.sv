// tb_network_interface: streams random flits through both queues with random
// stalls on both sides and checks order, content and the empty flag, and
// that the injection VC is the vc field of the last head flit sent.
//
// The reference is a pair of SystemVerilog queues. Each flit is pushed when
// valid and ready are both high at a rising edge. The two flit queues are this
// design's reading of the network interface, which is only named in the
// published core.
module tb_network_interface;
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end
  logic core_tx_valid, core_tx_ready, noc_tx_valid, noc_tx_ready;
  logic noc_rx_valid, noc_rx_ready, core_rx_valid, core_rx_ready, empty;
  logic [FLIT_W-1:0] core_tx_flit, noc_tx_flit, noc_rx_flit, core_rx_flit;
  logic [FLIT_W-1:0] q_tx [$], q_rx [$];
  int sent_tx, sent_rx, got_tx, got_rx, full_seen;
  logic [VC_W-1:0] noc_tx_vc, pkt_vc;
  int vc_seen [NUM_VC];
  network_interface #(.DEPTH(4)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (core_tx_valid && core_tx_ready) begin q_tx.push_back(core_tx_flit); sent_tx++; end
    if (noc_rx_valid && noc_rx_ready)   begin q_rx.push_back(noc_rx_flit);  sent_rx++; end
    if (noc_tx_valid && noc_tx_ready) begin
      head_flit_t h;
      h = head_flit_t'(noc_tx_flit);
      chk(q_tx.size() > 0 && noc_tx_flit == q_tx[0], "injection order"); void'(q_tx.pop_front()); got_tx++;
      if (h.ftype == FLIT_HEAD) pkt_vc = h.vc;
      chk(noc_tx_vc == pkt_vc, "injection VC follows the packet's head flit");
      vc_seen[noc_tx_vc]++;
    end
    if (core_rx_valid && core_rx_ready) begin
      chk(q_rx.size() > 0 && core_rx_flit == q_rx[0], "ejection order"); void'(q_rx.pop_front()); got_rx++;
    end
    if (core_tx_valid && !core_tx_ready) full_seen++;
  end
  // empty must be high exactly when both queues hold nothing
  always @(negedge clk) if (rst_n)
    chk(empty == (sent_tx == got_tx && sent_rx == got_rx), "empty flag tracks queue contents");
  always @(negedge clk) begin
    if (!(core_tx_valid && !core_tx_ready)) begin
      core_tx_valid = (sent_tx < 200) && ($urandom % 2); core_tx_flit = $urandom;
    end
    if (!(noc_rx_valid && !noc_rx_ready)) begin
      noc_rx_valid = (sent_rx < 200) && ($urandom % 2); noc_rx_flit = $urandom;
    end
    noc_tx_ready  = ($urandom % 4) == 0;
    core_rx_ready = ($urandom % 3) != 0;
  end
  initial begin
    pkt_vc = '0; foreach (vc_seen[v]) vc_seen[v] = 0;
    sent_tx = 0; sent_rx = 0; got_tx = 0; got_rx = 0; full_seen = 0;
    core_tx_valid = 0; noc_rx_valid = 0; core_tx_flit = 0; noc_rx_flit = 0;
    repeat (2) @(posedge clk);
    chk(empty, "empty after reset");
    rst_n = 1;
    wait (got_tx == 200 && got_rx == 200);
    @(negedge clk);
    chk(empty, "empty at the end");
    chk(full_seen > 0, "backpressure seen");
    foreach (vc_seen[v]) chk(vc_seen[v] > 0, $sformatf("VC %0d used", v));
    finish_tb();
  end
endmodule
