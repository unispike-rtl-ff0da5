// tb_postsyn_conn_mem: writes random entries and reads them back.
//
// The entry fields {flag, destination, connection bitmap} follow the published
// memory; writes take effect at the clock edge, and reads are combinational.
module tb_postsyn_conn_mem;
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
  localparam int D = 16, N = 64;
  logic cfg_we, cfg_flag, rd_flag;
  logic [3:0] cfg_addr, rd_addr;
  logic [8:0] cfg_dst, rd_dst;
  logic [N-1:0] cfg_bitmap, rd_bitmap;
  logic [N-1:0] rbm [D];
  logic [8:0]   rd_ [D];
  logic         rf [D];
  postsyn_conn_mem #(.CONN_DEPTH(D), .N_NEURONS(N)) dut (.*);
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_flag = 0; cfg_dst = 0; cfg_bitmap = 0; rd_addr = 0;
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      rf[i] = $urandom % 2; rd_[i] = 9'($urandom); rbm[i] = {$urandom, $urandom};
      cfg_we = 1; cfg_addr = 4'(i); cfg_flag = rf[i]; cfg_dst = rd_[i]; cfg_bitmap = rbm[i];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int i = 0; i < D; i++) begin
      rd_addr = 4'(i);
      #1 chk(rd_flag == rf[i] && rd_dst == rd_[i] && rd_bitmap == rbm[i], $sformatf("entry %0d", i));
    end
    finish_tb();
  end
endmodule
