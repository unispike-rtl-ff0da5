// tb_noc_router: the router at (1,1) of a 3x3 mesh receives random packets on
// all five inputs, each packet on a random virtual channel, with random
// per-VC output backpressure. Checks that every packet leaves on the
// XY-routed port and on its own VC, that on each (output, VC) its flits are
// not interleaved with another packet's, arrive in order and unchanged, that
// no flit is offered on a VC that is not ready, and that all are delivered.
// Packets carry a unique id in the synapse-id field and a sequence number in
// the delay field. It also requires that packets on different VCs were
// interleaved on one link, and that inputs contended for an output.
//
// Flits are injected with valid/ready at the rising edge; a watchdog catches
// deadlock. XY routing and 4 VCs follow the published network; wormhole
// locking per VC, keeping the VC on every hop and the port numbering are this
// design's choices.
module tb_noc_router;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end
  localparam int MX = 3, MY = 3, NPK = 80;
  logic              in_valid  [NPORTS];
  logic [VC_W-1:0]   in_vc     [NPORTS];
  logic [FLIT_W-1:0] in_flit   [NPORTS];
  logic [NUM_VC-1:0] in_ready  [NPORTS];
  logic              out_valid [NPORTS];
  logic [VC_W-1:0]   out_vc    [NPORTS];
  logic [FLIT_W-1:0] out_flit  [NPORTS];
  logic [NUM_VC-1:0] out_ready [NPORTS];
  logic              empty;
  logic [FLIT_W-1:0] src_q [NPORTS*NUM_VC][$];
  int exp_port [512], exp_vc [512];
  int cur_pkt [NPORTS*NUM_VC], cur_seq [NPORTS*NUM_VC], in_pkt [NPORTS*NUM_VC];
  int last_vc [NPORTS];
  int delivered, total, contention, vc_mix;

  noc_router #(.MESH_X(MX), .MESH_Y(MY), .DEPTH(4), .MY_X(1), .MY_Y(1)) dut (.*);

  function automatic int xy(int d);
    int dx, dy;
    dx = d % MX; dy = d / MX;
    if (dx > 1) return P_XP;
    if (dx < 1) return P_XM;
    if (dy > 1) return P_YP;
    if (dy < 1) return P_YM;
    return P_LOCAL;
  endfunction

  always @(posedge clk) if (rst_n) begin
    int heads;
    head_flit_t hi;
    heads = 0;
    for (int p = 0; p < NPORTS; p++) begin
      hi = head_flit_t'(in_flit[p]);
      if (in_valid[p] && hi.ftype == FLIT_HEAD) heads++;
    end
    if (heads > 1) contention++;
    for (int o = 0; o < NPORTS; o++) if (out_valid[o]) begin
      head_flit_t h;
      body_flit_t b;
      int q;
      chk(out_ready[o][out_vc[o]], "flit offered only on a ready VC");
      h = head_flit_t'(out_flit[o]);
      b = body_flit_t'(out_flit[o]);
      q = o * NUM_VC + int'(out_vc[o]);
      if (last_vc[o] >= 0 && last_vc[o] != int'(out_vc[o]) && in_pkt[o * NUM_VC + last_vc[o]]) vc_mix++;
      last_vc[o] = int'(out_vc[o]);
      if (h.ftype == FLIT_HEAD) begin
        chk(!in_pkt[q], "head only between packets on a VC");
        chk(xy(int'(h.dst)) == o, $sformatf("dst %0d routed to port %0d", h.dst, o));
        chk(h.vc == out_vc[o], "packet keeps its VC");
        in_pkt[q] = 1; cur_pkt[q] = -1; cur_seq[q] = 0;
      end else begin
        chk(in_pkt[q] == 1, "payload inside a packet");
        if (cur_pkt[q] < 0) begin
          cur_pkt[q] = int'(b.synapse_id);
          chk(exp_port[cur_pkt[q]] == o && exp_vc[cur_pkt[q]] == int'(out_vc[o]), "packet on its port and VC");
        end
        chk(int'(b.synapse_id) == cur_pkt[q], "no interleaving within a VC");
        chk(int'(b.delay) == cur_seq[q], "payload order");
        cur_seq[q]++;
        if (b.ftype == FLIT_TAIL) begin in_pkt[q] = 0; delivered++; end
      end
    end
  end

  always @(negedge clk) begin
    for (int o = 0; o < NPORTS; o++)
      for (int v = 0; v < NUM_VC; v++) out_ready[o][v] = ($urandom % 4) != 0;
    for (int p = 0; p < NPORTS; p++) begin
      int v;
      v = $urandom % NUM_VC;
      in_vc[p]    = VC_W'(v);
      in_valid[p] = (src_q[p * NUM_VC + v].size() > 0) && ($urandom % 4 != 0);
      in_flit[p]  = (src_q[p * NUM_VC + v].size() > 0) ? src_q[p * NUM_VC + v][0] : '0;
    end
  end
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NPORTS; p++)
      if (in_valid[p] && in_ready[p][in_vc[p]]) void'(src_q[p * NUM_VC + int'(in_vc[p])].pop_front());

  initial begin
    total = 0; delivered = 0; contention = 0; vc_mix = 0;
    for (int o = 0; o < NPORTS; o++) begin
      in_valid[o] = 0; in_vc[o] = '0; in_flit[o] = '0; out_ready[o] = '1; last_vc[o] = -1;
    end
    foreach (in_pkt[q]) in_pkt[q] = 0;
    for (int k = 0; k < NPK; k++) begin
      int p, d, len, v;
      body_flit_t b;
      head_flit_t h;
      p = $urandom % NPORTS; d = $urandom % (MX * MY); len = 1 + $urandom % 4; v = $urandom % NUM_VC;
      exp_port[k] = xy(d);
      exp_vc[k]   = v;
      h = make_head(9'(d), 9'(p));
      h.vc = VC_W'(v);
      src_q[p * NUM_VC + v].push_back(FLIT_W'(h));
      for (int i = 0; i < len; i++) begin
        b = make_body(9'(k), i == len - 1);
        b.delay = 4'(i);
        src_q[p * NUM_VC + v].push_back(FLIT_W'(b));
      end
      total++;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (delivered == total);
    repeat (3) @(negedge clk);
    chk(empty, "router empty at the end");
    chk(contention > 0, "contention occurred");
    chk(vc_mix > 0, $sformatf("packets of different VCs interleaved on a link (%0d)", vc_mix));
    finish_tb();
  end
endmodule
