// tb_activation_bitmap: sets random neurons, checks the vector against a
// reference array, checks clear and clear-over-set priority.
//
// A random neuron is set on each of about 100 clock cycles, and the vector is
// compared after every edge. The reference is a plain bit array. The expected
// behaviour (record firings, clear per timestep) follows the TS Manager
// description; clear-over-set priority is this design's rule.
module tb_activation_bitmap;
  localparam int N = 64;
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
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end
  logic clear, set_en;
  logic [5:0] set_idx;
  logic [N-1:0] bitmap, ref_bm;
  activation_bitmap #(.N_NEURONS(N)) dut (.*);
  initial begin
    clear = 0; set_en = 0; set_idx = 0; ref_bm = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(bitmap == '0, "reset value");
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 40; i++) begin
        set_en = ($urandom % 3) != 0;
        set_idx = 6'($urandom % N);
        if (set_en) ref_bm[set_idx] = 1'b1;
        @(negedge clk);
        chk(bitmap == ref_bm, $sformatf("bitmap after set %0d", set_idx));
      end
      set_en = 1; set_idx = 3; clear = 1;
      @(negedge clk);
      clear = 0; set_en = 0; ref_bm = '0;
      chk(bitmap == '0, "clear wins over set");
    end
    finish_tb();
  end
endmodule
