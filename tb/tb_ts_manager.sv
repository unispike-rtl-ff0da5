// tb_ts_manager: runs two timesteps of 32 neurons through the TS Manager with
// a packet-generator model that stays busy a random time after each start.
// Checks: a start for exactly the barrier neurons, in table order, with the
// table's start address; the activation bitmap equals the fired set; the
// update is stalled only while a barrier waits for a busy generator; the
// state is cleared at the timestep start.
//
// The update handshake is valid/ready at the rising edge. The '=' comparison
// with the barrier and the neuron counter follow the published TS Manager; the
// stall rule is this design's.
module tb_ts_manager;
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
  localparam int N = 32, D = 8, CD = 16;
  logic ts_start, upd_valid, upd_fired, upd_ready, pg_start, pg_ready, stall;
  logic [4:0] upd_id;
  logic [3:0] pg_start_addr;
  logic [N-1:0] act_bitmap, fired_ref;
  logic ct_we, ct_valid;
  logic [2:0] ct_addr;
  logic [4:0] ct_barrier;
  logic [3:0] ct_start;
  int busy_left, n_start, n_stall;
  int barriers [4] = '{3, 5, 17, 18};
  int starts   [4] = '{0, 2, 5, 6};

  ts_manager #(.N_NEURONS(N), .CT_DEPTH(D), .CONN_DEPTH(CD)) dut (.*);

  assign pg_ready = (busy_left == 0);
  always @(posedge clk) begin
    if (pg_start) busy_left <= 1 + $urandom % 6;
    else if (busy_left > 0) busy_left <= busy_left - 1;
  end

  // Checker on every accepted update.
  always @(posedge clk) if (rst_n && upd_valid) begin
    int b;
    b = -1;
    for (int k = 0; k < 4; k++) if (barriers[k] == int'(upd_id)) b = k;
    chk(stall == (b >= 0 && !pg_ready), "stall only at a barrier with a busy generator");
    chk(upd_ready == !stall, "ready is the inverse of stall");
    if (stall) n_stall++;
    if (upd_ready) begin
      chk(pg_start == (b >= 0), $sformatf("start at neuron %0d", upd_id));
      if (b >= 0) begin
        chk(b == n_start, "barriers in table order");
        chk(int'(pg_start_addr) == starts[b], "start address");
        n_start++;
      end
    end
  end

  initial begin
    ts_start = 0; upd_valid = 0; upd_fired = 0; upd_id = 0;
    ct_we = 0; ct_valid = 0; ct_addr = 0; ct_barrier = 0; ct_start = 0;
    busy_left = 0; n_start = 0; n_stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      ct_we = 1; ct_addr = 3'(k); ct_valid = 1; ct_barrier = 5'(barriers[k]); ct_start = 4'(starts[k]);
    end
    @(negedge clk);
    ct_we = 0;
    for (int t = 0; t < 2; t++) begin
      @(negedge clk);
      ts_start = 1;
      @(negedge clk);
      ts_start = 0;
      chk(act_bitmap == '0, "bitmap cleared at timestep start");
      fired_ref = '0; n_start = 0;
      for (int n = 0; n < N; n++) begin
        upd_valid = 1; upd_id = 5'(n); upd_fired = $urandom % 2;
        if (upd_fired) fired_ref[n] = 1'b1;
        #1;
        while (!upd_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      upd_valid = 0;
      chk(act_bitmap == fired_ref, "activation bitmap equals fired set");
      chk(n_start == 4, "four barriers reached");
      while (!pg_ready) @(negedge clk);
    end
    chk(n_stall > 0, "at least one barrier stall seen");
    finish_tb();
  end
endmodule
