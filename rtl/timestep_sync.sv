// timestep_sync: the system-wide timestep barrier.
//
// On `step_start` (accepted only when idle) it pulses `ts_start` to every
// core for one cycle. It then waits until `all_done` (every core has updated
// all its neurons and sent all its packets, every network buffer is empty
// and every receiver is idle) has been high for SETTLE consecutive cycles,
// and pulses `step_done`. The settle window covers flits that are between
// two buffers for a cycle. `ts_count` counts finished timesteps. The
// published system only states that cores are kept on the same timestep;
// this mechanism is this design's choice.
module timestep_sync #(
  parameter int unsigned SETTLE = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step_start,
  input  logic        all_done,
  output logic        ts_start,
  output logic        step_done,
  output logic        busy,
  output logic [31:0] ts_count
);
  typedef enum logic [1:0] {T_IDLE, T_LAUNCH, T_WAIT} tstate_e;
  tstate_e st_q;
  logic [$clog2(SETTLE+1)-1:0] quiet_q;

  assign ts_start = (st_q == T_LAUNCH);
  assign busy     = (st_q != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= T_IDLE;
      quiet_q   <= '0;
      step_done <= 1'b0;
      ts_count  <= '0;
    end else begin
      step_done <= 1'b0;
      case (st_q)
        T_IDLE:   if (step_start) st_q <= T_LAUNCH;
        T_LAUNCH: begin
          quiet_q <= '0;
          st_q    <= T_WAIT;
        end
        T_WAIT: begin
          if (!all_done) quiet_q <= '0;
          else if (quiet_q == ($clog2(SETTLE+1))'(SETTLE - 1)) begin
            st_q      <= T_IDLE;
            step_done <= 1'b1;
            ts_count  <= ts_count + 1;
          end else quiet_q <= quiet_q + 1'b1;
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end
endmodule
