// tb_spike_packet_decoder: sends random address-merged packets (random
// gaps and accumulator stalls) and checks one spike event per body/tail flit
// with the source core of its head flit, and the error flag on a stray body.
//
// The decoder is combinational on the data path, and one event leaves per
// accepted payload flit. Decoding head, body and tail flits follows the
// published decoder; the error flag is this design's.
module tb_spike_packet_decoder;
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
  logic flit_valid, flit_ready, spk_valid, spk_ready, in_packet, err;
  logic [FLIT_W-1:0] flit;
  logic [COORD_W-1:0] spk_src;
  logic [SYNID_W-1:0] spk_syn;
  logic [COORD_W+SYNID_W-1:0] exp_q [$];
  int n_err;
  spike_packet_decoder dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (spk_valid && spk_ready) begin
      chk(exp_q.size() > 0 && {spk_src, spk_syn} == exp_q[0],
          $sformatf("spike %0d:%0d", spk_src, spk_syn));
      void'(exp_q.pop_front());
    end
    if (err) n_err++;
  end
  always @(negedge clk) spk_ready = ($urandom % 3) != 0;

  task automatic send(input logic [FLIT_W-1:0] f);
    flit_valid = 1; flit = f;
    #1;
    while (!flit_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    flit_valid = 0;
    if ($urandom % 2) @(negedge clk);
  endtask

  initial begin
    flit_valid = 0; flit = 0; n_err = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < 50; p++) begin
      logic [COORD_W-1:0] s;
      int k;
      s = 9'($urandom); k = 1 + $urandom % 6;
      send(FLIT_W'(make_head(9'd5, s)));
      chk(in_packet, "in packet after head");
      for (int i = 0; i < k; i++) begin
        logic [SYNID_W-1:0] id;
        id = 9'($urandom);
        exp_q.push_back({s, id});
        send(FLIT_W'(make_body(id, i == k - 1)));
      end
      chk(!in_packet, "packet closed by tail");
    end
    // A body flit outside a packet is dropped and flagged.
    send(FLIT_W'(make_body(9'd3, 1'b0)));
    repeat (3) @(negedge clk);
    chk(exp_q.size() == 0, "all spikes delivered");
    chk(n_err == 1, "stray body flit flagged");
    finish_tb();
  end
endmodule
