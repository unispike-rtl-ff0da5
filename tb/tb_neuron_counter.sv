// tb_neuron_counter: increments, clear, and saturation at CT_DEPTH-1.
//
// Every increment takes effect at the next rising edge. The counter as an
// index into the checking table follows the published TS Manager; saturation
// is this design's choice.
module tb_neuron_counter;
  localparam int D = 8;
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
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end
  logic clear, incr;
  logic [2:0] index;
  int expect_i;
  neuron_counter #(.CT_DEPTH(D)) dut (.*);
  initial begin
    clear = 0; incr = 0; expect_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      chk(int'(index) == expect_i, $sformatf("index %0d expected %0d", index, expect_i));
      incr  = $urandom % 2;
      clear = ($urandom % 13) == 0;
      if (clear) expect_i = 0;
      else if (incr && expect_i < D - 1) expect_i++;
    end
    finish_tb();
  end
endmodule
