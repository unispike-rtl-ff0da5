// tb_neuron_state_mem: configuration and engine writes, read-back, and
// configuration priority on the shared write port.
//
// Writes land at the rising edge and reads are combinational. The 48-bit state
// word and the write-port priority are this design's choices.
module tb_neuron_state_mem;
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
  localparam int N = 16;
  logic cfg_we, wr_en;
  logic [3:0] cfg_addr, rd_addr, wr_addr;
  neuron_state_t cfg_wdata, rd_data, wr_data;
  neuron_state_t refm [N];
  neuron_state_mem #(.N_NEURONS(N)) dut (.*);
  initial begin
    cfg_we = 0; wr_en = 0; cfg_addr = 0; rd_addr = 0; wr_addr = 0; cfg_wdata = '0; wr_data = '0;
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 4'(i); cfg_wdata = {$urandom, 16'($urandom)}; refm[i] = cfg_wdata;
    end
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      rd_addr = 4'($urandom);
      #1 chk(rd_data == refm[rd_addr], $sformatf("read %0d", rd_addr));
      cfg_we = $urandom % 4 == 0; wr_en = $urandom % 2;
      cfg_addr = 4'($urandom); wr_addr = 4'($urandom);
      cfg_wdata = {$urandom, 16'($urandom)}; wr_data = {$urandom, 16'($urandom)};
      if (wr_en && !cfg_we) refm[wr_addr] = wr_data;
      if (cfg_we) refm[cfg_addr] = cfg_wdata;
    end
    finish_tb();
  end
endmodule
