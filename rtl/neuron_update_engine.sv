// neuron_update_engine: updates the core's neurons one after another in each
// timestep and reports each result to the TS Manager.
//
// Neuron n (0..N_NEURONS-1, which is the execution order fixed at compile
// time) is updated as a leaky integrate-and-fire neuron:
//   v' = v - (v >>> leak) + wsum      (leak = 0: no leak)
//   fired = (v' >= vth);  if fired, v' := 0
// The new state is written back, the used weight sum is cleared, and
// (n, fired) is offered to the TS Manager with upd_valid. The engine moves to
// the next neuron when upd_ready is high, so one neuron takes one cycle
// unless the TS Manager stalls it at a barrier. `done` rises after the last
// neuron and stays high until the next `start`.
// Sequential update and thresholding follow the published core; the LIF
// arithmetic, widths and reset-to-zero are this design's choice.
module neuron_update_engine
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS = 512,
  localparam int unsigned NEUR_W   = $clog2(N_NEURONS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   done,
  // neuron state memory
  output logic [NEUR_W-1:0]      st_addr,
  input  neuron_state_t          st_rdata,
  output logic                   st_we,
  output neuron_state_t          st_wdata,
  // weight sum memory, current bank
  output logic [NEUR_W-1:0]      ws_addr,
  input  logic signed [WS_W-1:0] ws_rdata,
  output logic                   ws_clear,
  // TS Manager
  output logic                   upd_valid,
  output logic [NEUR_W-1:0]      upd_id,
  output logic                   upd_fired,
  input  logic                   upd_ready
);
  logic              run_q;
  logic [NEUR_W-1:0] n_q;
  logic signed [25:0] v_next;
  logic              fire;

  assign st_addr = n_q;
  assign ws_addr = n_q;

  always_comb begin
    v_next = 26'(st_rdata.v) + 26'(ws_rdata);
    if (st_rdata.leak != '0) v_next = v_next - 26'(st_rdata.v >>> st_rdata.leak);
    fire = (v_next >= $signed({10'd0, st_rdata.vth}));
    st_wdata = st_rdata;
    if (fire)                          st_wdata.v = '0;
    else if (v_next >  26'sd8388607)   st_wdata.v = 24'sd8388607;
    else if (v_next < -26'sd8388608)   st_wdata.v = -24'sd8388608;
    else                               st_wdata.v = 24'(v_next);
  end

  assign upd_valid = run_q;
  assign upd_id    = n_q;
  assign upd_fired = fire;
  assign st_we     = run_q && upd_ready;
  assign ws_clear  = run_q && upd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0;
      n_q   <= '0;
      done  <= 1'b0;
    end else if (start) begin
      run_q <= 1'b1;
      n_q   <= '0;
      done  <= 1'b0;
    end else if (run_q && upd_ready) begin
      if (n_q == NEUR_W'(N_NEURONS - 1)) begin
        run_q <= 1'b0;
        done  <= 1'b1;
      end else begin
        n_q <= n_q + 1'b1;
      end
    end
  end
endmodule
