// flit_fifo: synchronous FIFO of flits with valid/ready on both sides.
//
// DEPTH entries (a power of two). in_ready is high when not full, out_valid
// when not empty; both ends may move a flit in the same cycle. Data written
// at an edge is visible at the output from the next cycle.
module flit_fifo
  import unispike_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [FLIT_W-1:0] in_flit,
  output logic              in_ready,
  output logic              out_valid,
  output logic [FLIT_W-1:0] out_flit,
  input  logic              out_ready,
  output logic              empty
);
  logic [FLIT_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wr_q, rd_q;
  logic [AW:0]       cnt_q;
  logic              push, pop;

  assign in_ready  = (cnt_q != (AW+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign empty     = (cnt_q == '0);
  assign out_flit  = mem[rd_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wr_q] <= in_flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q  <= '0;
      rd_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == AW'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      if (pop)  rd_q <= (rd_q == AW'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
