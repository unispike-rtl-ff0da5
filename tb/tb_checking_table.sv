// tb_checking_table: writes entries, reads them back, checks valid bits reset.
//
// Writes happen one per clock, and reads are combinational, so each entry is
// checked in the cycle after its write. The entry contents {barrier, start}
// follow the published checking table; the valid bit is this design's
// addition.
module tb_checking_table;
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
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish_tb();
  end
  localparam int D = 16;
  logic cfg_we, cfg_valid, rd_valid;
  logic [3:0] cfg_addr, rd_idx;
  logic [8:0] cfg_barrier, rd_barrier;
  logic [8:0] cfg_start, rd_start;
  logic [8:0] rb [D];
  logic [8:0] rs [D];
  logic       rv [D];
  checking_table #(.CT_DEPTH(D)) dut (.*);
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_valid = 0; cfg_barrier = 0; cfg_start = 0; rd_idx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      rd_idx = 4'(i);
      #1 chk(rd_valid == 1'b0, "entry invalid after reset");
    end
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(i);
      rv[i] = (i % 5) != 4; rb[i] = 9'($urandom); rs[i] = 9'($urandom);
      cfg_valid = rv[i]; cfg_barrier = rb[i]; cfg_start = rs[i];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int i = D - 1; i >= 0; i--) begin
      rd_idx = 4'(i);
      #1;
      chk(rd_valid == rv[i] && rd_barrier == rb[i] && rd_start == rs[i],
          $sformatf("entry %0d", i));
    end
    finish_tb();
  end
endmodule
