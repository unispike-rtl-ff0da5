// tb_index_decoder: loads random (conn, act) pairs and checks that the ids
// come out in ascending order, exactly the set bits of conn & act, with
// `last` on the final one.
//
// One id is popped per cycle, so a vector with k active bits must drain in
// exactly k cycles; this is checked. Ascending order is this design's choice;
// the AND of connection and activation bitmaps follows the published packet
// generator.
module tb_index_decoder;
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
  localparam int N = 64;
  logic load, pop, valid, last;
  logic [N-1:0] conn_bitmap, act_bitmap, want;
  logic [5:0] idx;
  index_decoder #(.N_NEURONS(N)) dut (.*);
  initial begin
    load = 0; pop = 0; conn_bitmap = 0; act_bitmap = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      conn_bitmap = {$urandom, $urandom}; act_bitmap = {$urandom, $urandom};
      if (t % 7 == 0) act_bitmap = '0;
      want = conn_bitmap & act_bitmap;
      load = 1;
      @(negedge clk);
      load = 0;
      for (int i = 0; i < N; i++) begin
        if (want[i]) begin
          want[i] = 1'b0;
          chk(valid && int'(idx) == i && last == (want == '0), $sformatf("id %0d got %0d", i, idx));
          pop = 1;
          @(negedge clk);
          pop = 0;
        end
      end
      chk(!valid, "all ids consumed");
    end
    finish_tb();
  end
endmodule
