// tb_weight_sum_accumulator: connects the accumulator to behavioural weight
// tables and a weight-sum array, sends random spikes and compares the sums
// with a reference accumulation. Checks that a spike with L synapses keeps
// the accumulator busy for exactly L cycles, and saturation.
//
// One synapse is accumulated per clock cycle. The lookup chain and saturation
// are this design's choices within the published weight-sum accumulator.
module tb_weight_sum_accumulator;
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
  localparam int N = 32, SD = 256;
  logic spk_valid, spk_ready, ws_we, busy;
  logic [COORD_W-1:0] spk_src, lk_src;
  logic [SYNID_W-1:0] spk_syn, lk_syn;
  logic [7:0] lk_ptr, syn_addr;
  logic [5:0] lk_len;
  logic [4:0] syn_neuron, ws_addr;
  logic signed [WEIGHT_W-1:0] syn_weight;
  logic signed [WS_W-1:0] ws_rdata, ws_wdata;
  logic signed [WS_W-1:0] ws [N];
  int ref_ws [N];
  logic [7:0] aptr [16];
  logic [5:0] alen [16];
  logic [4:0] sn [SD];
  logic signed [7:0] sw [SD];
  int busy_cyc, exp_busy;

  weight_sum_accumulator #(.N_NEURONS(N), .SYN_DEPTH(SD)) dut (.*);

  // Behavioural memories: axon index = synapse id (source core ignored).
  assign lk_ptr = aptr[lk_syn[3:0]];
  assign lk_len = alen[lk_syn[3:0]];
  assign syn_neuron = sn[syn_addr];
  assign syn_weight = sw[syn_addr];
  assign ws_rdata = ws[ws_addr];
  always @(posedge clk) if (rst_n && ws_we) ws[ws_addr] <= ws_wdata;
  always @(posedge clk) if (busy) busy_cyc++;

  function automatic int sat(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    spk_valid = 0; spk_src = 0; spk_syn = 0; busy_cyc = 0;
    for (int i = 0; i < N; i++) begin ws[i] = 0; ref_ws[i] = 0; end
    for (int a = 0; a < 16; a++) begin aptr[a] = 8'(a * 16); alen[a] = 6'($urandom % 17); end
    alen[0] = 0;
    alen[15] = 16;
    for (int s = 0; s < SD; s++) begin sn[s] = 5'($urandom); sw[s] = 8'($urandom); end
    for (int s = 240; s < 256; s++) begin sn[s] = 5'd7; sw[s] = 8'sd127; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = (t < 30) ? 15 : $urandom % 16;   // first, drive neuron 7 into saturation
      @(negedge clk);
      spk_valid = 1; spk_syn = 9'(a); spk_src = 9'($urandom);
      busy_cyc = 0; exp_busy = alen[a];
      #1;
      while (!spk_ready) begin @(negedge clk); #1; end
      for (int k = 0; k < alen[a]; k++)
        ref_ws[sn[aptr[a] + k]] = sat(ref_ws[sn[aptr[a] + k]] + sw[aptr[a] + k]);
      @(negedge clk);
      spk_valid = 0;
      while (busy) @(negedge clk);
      if (t == 29) chk(ws[7] == 16'sd32767, $sformatf("saturated at the positive limit: %0d", ws[7]));
      chk(busy_cyc == exp_busy, $sformatf("busy %0d cycles, expected %0d", busy_cyc, exp_busy));
    end
    for (int i = 0; i < N; i++) chk(int'(ws[i]) == ref_ws[i], $sformatf("weight sum %0d: %0d vs %0d", i, ws[i], ref_ws[i]));
    finish_tb();
  end
endmodule
