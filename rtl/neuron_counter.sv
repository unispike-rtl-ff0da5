// neuron_counter: index of the next checking-table entry, i.e. of the next
// barrier neuron the TS Manager waits for.
//
// `incr` advances it by one when the current barrier has been reached;
// `clear` returns it to 0 at the start of each timestep (clear wins). The
// counter saturates at CT_DEPTH-1 rather than wrapping. Counting barriers
// follows the published TS Manager; saturation and clear are own choices.
module neuron_counter #(
  parameter int unsigned CT_DEPTH = 512,
  localparam int unsigned CT_AW   = $clog2(CT_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             incr,
  output logic [CT_AW-1:0] index
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     index <= '0;
    else if (clear) index <= '0;
    else if (incr && index != CT_AW'(CT_DEPTH - 1)) index <= index + 1'b1;
  end
endmodule
