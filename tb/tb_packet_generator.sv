// tb_packet_generator: loads a connection memory with three barrier runs,
// starts the generator on each with a random activation bitmap and random
// backpressure, and compares every flit with a list computed from the
// bitmaps. Also checks that empty destinations are skipped and, without
// backpressure, the cycle count (2 cycles per entry plus one per payload
// flit, plus one to leave idle).
//
// The packet format {HEAD, dst, src} followed by BODY... TAIL, with one
// payload per active neuron, follows the published address-merged packet. The
// flit bit positions and the cycle count are this design's.
module tb_packet_generator;
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
  localparam int N = 32, CD = 16;
  logic [COORD_W-1:0] src_coord = 9'd77;
  logic start, ready, flit_valid, flit_ready, ev_packet, ev_empty_dest;
  logic [3:0] start_addr;
  logic [N-1:0] act_bitmap;
  logic [FLIT_W-1:0] flit;
  logic cfg_we, cfg_flag;
  logic [3:0] cfg_addr;
  logic [COORD_W-1:0] cfg_dst;
  logic [N-1:0] cfg_bitmap;
  logic [N-1:0] conn [CD];
  logic [COORD_W-1:0] dsts [CD];
  logic flags [CD];
  logic [FLIT_W-1:0] exp_q [$];
  int n_empty, n_pkt, bp_on;
  int run_start [3] = '{0, 3, 4};

  packet_generator #(.N_NEURONS(N), .CONN_DEPTH(CD)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (flit_valid && flit_ready) begin
      if (exp_q.size() == 0) chk(0, "unexpected flit");
      else begin
        logic [FLIT_W-1:0] e;
        e = exp_q.pop_front();
        chk(flit == e, $sformatf("flit %h expected %h", flit, e));
      end
    end
    if (ev_empty_dest) n_empty++;
    if (ev_packet) n_pkt++;
  end
  always @(negedge clk) flit_ready = bp_on ? ($urandom % 3 != 0) : 1'b1;

  function automatic int build(int a);
    int cyc;
    cyc = 1;
    while (1) begin
      logic [N-1:0] m;
      m = conn[a] & act_bitmap;
      cyc += 2;
      if (m != '0) begin
        exp_q.push_back(FLIT_W'(make_head(dsts[a], src_coord)));
        for (int i = 0; i < N; i++) if (m[i]) begin
          m[i] = 1'b0;
          exp_q.push_back(FLIT_W'(make_body(SYNID_W'(i), m == '0)));
          cyc++;
        end
      end
      if (flags[a]) break;
      a++;
    end
    return cyc;
  endfunction

  initial begin
    int cyc, expc, e0, p0;
    start = 0; start_addr = 0; act_bitmap = 0; bp_on = 0;
    cfg_we = 0; cfg_addr = 0; cfg_flag = 0; cfg_dst = 0; cfg_bitmap = 0;
    n_empty = 0; n_pkt = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 6; a++) begin
      conn[a] = $urandom; dsts[a] = 9'(100 + a);
      flags[a] = (a == 2 || a == 3 || a == 5);
      if (a == 1) conn[a] = 32'h0000_00f0;
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(a); cfg_flag = flags[a]; cfg_dst = dsts[a]; cfg_bitmap = conn[a];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int t = 0; t < 30; t++) begin
      int r;
      r = t % 3;
      bp_on = (t >= 3);
      act_bitmap = $urandom;
      if (t == 0) act_bitmap = 32'hffff_ff0f; // entry 1 has no active neuron
      e0 = n_empty; p0 = n_pkt;
      expc = build(run_start[r]);
      @(negedge clk);
      chk(ready, "idle before start");
      start = 1; start_addr = 4'(run_start[r]);
      @(negedge clk);
      start = 0; cyc = 1;
      while (!ready) begin @(negedge clk); cyc++; end
      chk(exp_q.size() == 0, "all expected flits sent");
      if (!bp_on) chk(cyc == expc, $sformatf("run %0d took %0d cycles, expected %0d", r, cyc, expc));
      if (t == 0) chk(n_empty - e0 >= 1, "empty destination skipped");
    end
    chk(n_pkt > 0, "packets sent");
    finish_tb();
  end
endmodule
