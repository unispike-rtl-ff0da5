// index_decoder: turns the activated connection bitmap of one destination
// into a stream of neuron ids.
//
// On `load` it stores conn_bitmap & act_bitmap (the published bitwise AND).
// A priority encoder then presents the lowest remaining set bit as `idx`
// with `valid`; `last` says it is the only one left. `pop` clears that bit at
// the next clock edge. Lowest-index-first order is this design's choice.
// `load` takes precedence over `pop`.
module index_decoder #(
  parameter int unsigned N_NEURONS = 512,
  localparam int unsigned NEUR_W   = $clog2(N_NEURONS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [N_NEURONS-1:0] conn_bitmap,
  input  logic [N_NEURONS-1:0] act_bitmap,
  input  logic                 pop,
  output logic                 valid,
  output logic [NEUR_W-1:0]    idx,
  output logic                 last
);
  logic [N_NEURONS-1:0] remain_q;
  logic [N_NEURONS-1:0] lowest;    // one-hot of the lowest set bit

  assign lowest = remain_q & (~remain_q + 1'b1);

  // Priority encoder: position of the one-hot bit.
  always_comb begin
    idx = '0;
    for (int unsigned i = 0; i < N_NEURONS; i++)
      if (lowest[i]) idx = NEUR_W'(i);
  end

  assign valid = |remain_q;
  assign last  = valid && ((remain_q & ~lowest) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          remain_q <= '0;
    else if (load)       remain_q <= conn_bitmap & act_bitmap;
    else if (pop)        remain_q <= remain_q & ~lowest;
  end
endmodule
