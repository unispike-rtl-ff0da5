// packet_generator: the redesigned packet generator. Builds address-merged
// spike packets, one per destination core.
//
// Started by the TS Manager with a start address into the post-synaptic
// connections memory, it walks entries from there. For each entry it ANDs
// the entry's connection bitmap with the activation bitmap (index decoder).
// If any neuron is active it sends one head flit carrying the destination
// and this core's coordinate, then one body flit per active neuron carrying
// that neuron's id, the last one typed TAIL. It then moves to the next entry
// unless the entry's flag is set, in which case it returns to idle.
//
// Timing: 1 cycle to leave IDLE, 1 cycle per entry to load (LOAD), then one
// flit per cycle while flit_ready is high, so an entry with k active neurons
// takes k+2 cycles without backpressure; an entry with none takes 2 cycles
// and sends nothing. `ready` is high only in IDLE.
// The walk, the AND, the priority encoding and the flag test follow the
// published generator. Skipping empty destinations, writing 0 into the
// VC/port/delay fields and the valid/ready output are own choices.
module packet_generator
  import unispike_pkg::*;
#(
  parameter int unsigned N_NEURONS  = 512,
  parameter int unsigned CONN_DEPTH = 512,
  localparam int unsigned NEUR_W    = $clog2(N_NEURONS),
  localparam int unsigned CONN_AW   = $clog2(CONN_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [COORD_W-1:0]   src_coord,
  // TS Manager
  input  logic                 start,
  input  logic [CONN_AW-1:0]   start_addr,
  output logic                 ready,
  input  logic [N_NEURONS-1:0] act_bitmap,
  // flit stream to the network interface
  output logic                 flit_valid,
  output logic [FLIT_W-1:0]    flit,
  input  logic                 flit_ready,
  // events
  output logic                 ev_packet,      // a head flit was sent
  output logic                 ev_empty_dest,  // a destination had no active neuron
  // post-synaptic connections memory configuration
  input  logic                 cfg_we,
  input  logic [CONN_AW-1:0]   cfg_addr,
  input  logic                 cfg_flag,
  input  logic [COORD_W-1:0]   cfg_dst,
  input  logic [N_NEURONS-1:0] cfg_bitmap
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_HEAD, S_BODY} state_e;
  state_e state_q;

  logic [CONN_AW-1:0]   addr_q;
  logic                 flag_q;
  logic [COORD_W-1:0]   dst_q;
  logic                 m_flag;
  logic [COORD_W-1:0]   m_dst;
  logic [N_NEURONS-1:0] m_bitmap;
  logic                 id_valid, id_last, id_pop, id_load;
  logic [NEUR_W-1:0]    id_idx;
  logic                 entry_done;

  postsyn_conn_mem #(.CONN_DEPTH(CONN_DEPTH), .N_NEURONS(N_NEURONS), .COORD_W(COORD_W)) u_mem (
    .clk, .cfg_we, .cfg_addr, .cfg_flag, .cfg_dst, .cfg_bitmap,
    .rd_addr(addr_q), .rd_flag(m_flag), .rd_dst(m_dst), .rd_bitmap(m_bitmap)
  );

  assign id_load = (state_q == S_LOAD);
  assign id_pop  = (state_q == S_BODY) && flit_ready;

  index_decoder #(.N_NEURONS(N_NEURONS)) u_idx (
    .clk, .rst_n, .load(id_load), .conn_bitmap(m_bitmap), .act_bitmap,
    .pop(id_pop), .valid(id_valid), .idx(id_idx), .last(id_last)
  );

  assign ready = (state_q == S_IDLE);

  always_comb begin
    flit_valid = 1'b0;
    flit       = '0;
    case (state_q)
      S_HEAD: begin
        flit_valid = id_valid;
        flit       = make_head(dst_q, src_coord);
      end
      S_BODY: begin
        flit_valid = 1'b1;
        flit       = make_body(SYNID_W'(id_idx), id_last);
      end
      default: ;
    endcase
  end

  assign ev_packet     = (state_q == S_HEAD) && id_valid && flit_ready;
  assign ev_empty_dest = (state_q == S_HEAD) && !id_valid;
  // The current entry is finished: no active neuron, or its tail flit leaves.
  assign entry_done    = ev_empty_dest || ((state_q == S_BODY) && flit_ready && id_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      flag_q  <= 1'b0;
      dst_q   <= '0;
    end else begin
      case (state_q)
        S_IDLE: if (start) begin
          addr_q  <= start_addr;
          state_q <= S_LOAD;
        end
        S_LOAD: begin
          flag_q  <= m_flag;
          dst_q   <= m_dst;
          state_q <= S_HEAD;
        end
        S_HEAD: if (!id_valid || flit_ready) state_q <= S_BODY;
        S_BODY: ;
        default: state_q <= S_IDLE;
      endcase
      if (entry_done) begin
        if (flag_q) state_q <= S_IDLE;            // '=1' -> terminate
        else begin
          addr_q  <= addr_q + 1'b1;               // increment index
          state_q <= S_LOAD;
        end
      end
    end
  end

  // A packet never leaves a body flit pending when the generator goes idle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_BODY) |-> id_valid);
endmodule
