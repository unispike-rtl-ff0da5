// tb_timestep_sync: checks the start pulse, that step_done waits for
// all_done to be stable for SETTLE cycles, the counter, and that a start
// request while busy is ignored.
//
// The step_start/step_done pulses are one clock wide. Global timestep
// synchronisation is published only as a requirement; this barrier is this
// design's.
module tb_timestep_sync;
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
  logic step_start, all_done, ts_start, step_done, busy;
  logic [31:0] ts_count;
  int n_ts_start;
  timestep_sync #(.SETTLE(3)) dut (.*);
  always @(posedge clk) if (rst_n && ts_start) n_ts_start++;
  initial begin
    int cyc;
    step_start = 0; all_done = 0; n_ts_start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 10; s++) begin
      int work;
      work = 3 + $urandom % 20;
      @(negedge clk);
      step_start = 1; all_done = 1;
      @(negedge clk);
      step_start = 0;
      chk(ts_start, "ts_start pulses");
      @(negedge clk);
      chk(!ts_start, "ts_start one cycle");
      all_done = 0;
      repeat (work) begin
        @(negedge clk);
        step_start = 1;            // ignored while busy
        chk(busy && !step_done, "busy while not done");
      end
      step_start = 0;
      all_done = 1;
      @(negedge clk); all_done = 0;  // one-cycle glitch must not finish the step
      @(negedge clk); all_done = 1;
      cyc = 0;
      while (!step_done) begin @(negedge clk); cyc++; end
      chk(cyc == 3, $sformatf("done %0d cycles after all_done", cyc));
      chk(ts_count == 32'(s + 1), "timestep count");
    end
    chk(n_ts_start == 10, "one ts_start per step");
    finish_tb();
  end
endmodule
