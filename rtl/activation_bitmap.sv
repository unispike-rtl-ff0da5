// activation_bitmap: one bit per local neuron, set when that neuron fires in
// the current timestep.
//
// The whole vector is visible at all times so the packet generator can AND it
// with a destination's connection bitmap. `clear` (timestep start) empties it;
// `set_en` marks neuron `set_idx` at the next clock edge. If both are asserted
// in the same cycle the clear wins. Recording firings follows the published
// TS Manager; clearing at the timestep start is this design's choice.
module activation_bitmap #(
  parameter int unsigned N_NEURONS = 512,
  localparam int unsigned NEUR_W   = $clog2(N_NEURONS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 set_en,
  input  logic [NEUR_W-1:0]    set_idx,
  output logic [N_NEURONS-1:0] bitmap
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      bitmap <= '0;
    else if (clear)  bitmap <= '0;
    else if (set_en) bitmap[set_idx] <= 1'b1;
  end
endmodule
