// postsyn_conn_mem: the post-synaptic connections memory of the redesigned
// packet generator.
//
// One entry per (barrier, destination core) pair: {flag, destination
// coordinate, connection bitmap}. Bit j of the connection bitmap is set when
// local neuron j has a synapse onto the destination core. Entries belonging
// to one barrier are contiguous (the order of the checking table) and the
// last of them has flag = 1. With the default sizes the array is
// 512 x 522 bits = 32.625 KB. The entry layout is published; the write port
// and combinational read are own choices.
module postsyn_conn_mem #(
  parameter int unsigned CONN_DEPTH = 512,
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned COORD_W    = unispike_pkg::COORD_W,
  localparam int unsigned CONN_AW   = $clog2(CONN_DEPTH)
) (
  input  logic                 clk,
  input  logic                 cfg_we,
  input  logic [CONN_AW-1:0]   cfg_addr,
  input  logic                 cfg_flag,
  input  logic [COORD_W-1:0]   cfg_dst,
  input  logic [N_NEURONS-1:0] cfg_bitmap,
  input  logic [CONN_AW-1:0]   rd_addr,
  output logic                 rd_flag,
  output logic [COORD_W-1:0]   rd_dst,
  output logic [N_NEURONS-1:0] rd_bitmap
);
  logic                 flag_q   [CONN_DEPTH];
  logic [COORD_W-1:0]   dst_q    [CONN_DEPTH];
  logic [N_NEURONS-1:0] bitmap_q [CONN_DEPTH];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      flag_q[cfg_addr]   <= cfg_flag;
      dst_q[cfg_addr]    <= cfg_dst;
      bitmap_q[cfg_addr] <= cfg_bitmap;
    end
  end

  assign rd_flag   = flag_q[rd_addr];
  assign rd_dst    = dst_q[rd_addr];
  assign rd_bitmap = bitmap_q[rd_addr];
endmodule
