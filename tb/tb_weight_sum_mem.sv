// tb_weight_sum_mem: checks that the accumulator port writes the bank of the
// next timestep, the update-engine port reads and clears the current bank,
// that both work in the same cycle, and that the banks swap with parity.
//
// Writes take effect at the clock edge, and reads are combinational. Double
// banking is this design's choice.
module tb_weight_sum_mem;
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
  logic parity, acc_we, nue_clear;
  logic [3:0] acc_addr, nue_addr;
  logic signed [WS_W-1:0] acc_rdata, acc_wdata, nue_rdata;
  int refb [2][N];
  weight_sum_mem #(.N_NEURONS(N)) dut (.*);
  initial begin
    parity = 0; acc_we = 0; nue_clear = 0; acc_addr = 0; nue_addr = 0; acc_wdata = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < N; i++) refb[b][i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t % 50 == 0) parity = ~parity;
      acc_addr = 4'($urandom); nue_addr = 4'($urandom);
      acc_we = $urandom % 2; nue_clear = $urandom % 4 == 0; acc_wdata = 16'($urandom);
      #1;
      chk(int'(acc_rdata) == refb[!parity][acc_addr], "accumulator reads next bank");
      chk(int'(nue_rdata) == refb[parity][nue_addr], "engine reads current bank");
      if (acc_we) refb[!parity][acc_addr] = int'(acc_wdata);
      if (nue_clear) refb[parity][nue_addr] = 0;
    end
    finish_tb();
  end
endmodule
