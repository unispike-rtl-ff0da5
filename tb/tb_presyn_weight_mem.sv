// tb_presyn_weight_mem: fills the three tables and checks axon lookup
// (base[source] + source neuron) and synapse reads against reference arrays.
//
// Reads are combinational. The three-level base/axon/synapse layout is this
// design's choice for the published synapse memory.
module tb_presyn_weight_mem;
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
  localparam int N = 32, NS = 8, AD = 64, SD = 256;
  logic cfg_base_we, cfg_axon_we, cfg_syn_we;
  logic [CFG_AW-1:0] cfg_addr;
  logic [5:0] cfg_base;
  logic [7:0] cfg_ptr, axon_ptr, syn_addr;
  logic [5:0] cfg_len, axon_len;
  logic [4:0] cfg_neuron, syn_neuron;
  logic signed [WEIGHT_W-1:0] cfg_weight, syn_weight;
  logic [COORD_W-1:0] src_core;
  logic [SYNID_W-1:0] syn_id;
  logic [5:0] rbase [NS];
  logic [7:0] rptr [AD];
  logic [5:0] rlen [AD];
  logic [4:0] rn [SD];
  logic [7:0] rw [SD];
  presyn_weight_mem #(.N_NEURONS(N), .N_SRC(NS), .AXON_DEPTH(AD), .SYN_DEPTH(SD)) dut (.*);
  initial begin
    {cfg_base_we, cfg_axon_we, cfg_syn_we} = 0; cfg_addr = 0; cfg_base = 0; cfg_ptr = 0;
    cfg_len = 0; cfg_neuron = 0; cfg_weight = 0; src_core = 0; syn_id = 0; syn_addr = 0;
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); rbase[i] = 6'(i * 8);
      cfg_base_we = 1; cfg_addr = CFG_AW'(i); cfg_base = rbase[i];
    end
    @(negedge clk); cfg_base_we = 0;
    for (int i = 0; i < AD; i++) begin
      @(negedge clk); rptr[i] = 8'($urandom); rlen[i] = 6'($urandom % 33);
      cfg_axon_we = 1; cfg_addr = CFG_AW'(i); cfg_ptr = rptr[i]; cfg_len = rlen[i];
    end
    @(negedge clk); cfg_axon_we = 0;
    for (int i = 0; i < SD; i++) begin
      @(negedge clk); rn[i] = 5'($urandom); rw[i] = 8'($urandom);
      cfg_syn_we = 1; cfg_addr = CFG_AW'(i); cfg_neuron = rn[i]; cfg_weight = rw[i];
    end
    @(negedge clk); cfg_syn_we = 0;
    for (int t = 0; t < 100; t++) begin
      int a;
      src_core = 9'($urandom % NS); syn_id = 9'($urandom % 8);
      syn_addr = 8'($urandom);
      a = int'(rbase[src_core]) + int'(syn_id);
      #1;
      chk(axon_ptr == rptr[a] && axon_len == rlen[a], $sformatf("axon %0d", a));
      chk(syn_neuron == rn[syn_addr] && syn_weight == rw[syn_addr], $sformatf("synapse %0d", syn_addr));
      @(negedge clk);
    end
    finish_tb();
  end
endmodule
