// noc_router: five-port 2D-mesh router with XY routing, NUM_VC virtual
// channels per port and wormhole switching.
//
// Ports: 0 local core, 1 towards x+1, 2 towards x-1, 3 towards y+1,
// 4 towards y-1. Each link carries one flit per cycle with its VC number
// (`*_vc`) and a per-VC ready vector: the sender may present a flit on VC v
// only when ready[v] is high, and a flit moves when valid and ready[vc] are
// both high. Each input has one DEPTH-flit FIFO per VC. A head flit at the
// front of a VC FIFO is routed by dimension order (first along x, then
// along y, then to the local port). It may take output o only if VC v of o
// is free; it then locks (o, v) until its tail flit has passed, so a packet
// keeps one VC on every hop and flits of packets on different VCs may
// interleave on a link. Each cycle a separable allocator first picks one
// requesting VC per input, round robin, then one input per output, round
// robin; a request counts only if the downstream VC has room, so a blocked
// VC never holds the link. A flit crosses the router in one cycle from the
// FIFO head.
// XY routing and 4 virtual channels follow the published system. Keeping
// the VC of the injecting core on every hop (no VC reallocation), the FIFO
// depth and the allocator are this design's choices. XY routing needs no VC
// for deadlock freedom; the VCs let packets pass a blocked one. Coordinates
// are dst = y * MESH_X + x. MESH_Y is not needed by XY routing and is kept so
// that every router receives the full mesh shape; lint reports it unused, as
// it does the flit fields that routing does not look at.
module noc_router
  import unispike_pkg::*;
#(
  parameter int unsigned MESH_X = 32,
  parameter int unsigned MESH_Y = 16,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned MY_X   = 0,
  parameter int unsigned MY_Y   = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid  [NPORTS],
  input  logic [VC_W-1:0]   in_vc     [NPORTS],
  input  logic [FLIT_W-1:0] in_flit   [NPORTS],
  output logic [NUM_VC-1:0] in_ready  [NPORTS],
  output logic              out_valid [NPORTS],
  output logic [VC_W-1:0]   out_vc    [NPORTS],
  output logic [FLIT_W-1:0] out_flit  [NPORTS],
  input  logic [NUM_VC-1:0] out_ready [NPORTS],
  output logic              empty
);
  localparam int unsigned PW = $clog2(NPORTS);
  localparam int unsigned NQ = NPORTS * NUM_VC;   // queue q = port * NUM_VC + vc

  logic              f_valid [NQ];
  logic [FLIT_W-1:0] f_flit  [NQ];
  logic              f_pop   [NQ];
  logic [NQ-1:0]     f_empty;

  // Per queue: the output its current packet holds.
  logic [PW-1:0]     route_q  [NQ];
  logic              routed_q [NQ];
  logic [PW-1:0]     want     [NQ];
  logic              req      [NQ];
  // Per (output, vc): lock state.
  logic              locked_q [NQ];
  // Allocation.
  logic [VC_W-1:0]   rr_in_q  [NPORTS];
  logic [PW-1:0]     rr_out_q [NPORTS];
  logic              sel_v    [NPORTS];
  logic [VC_W-1:0]   sel_vc   [NPORTS];
  logic [PW-1:0]     sel_o    [NPORTS];
  logic              grant_v  [NPORTS];
  logic [PW-1:0]     grant_in [NPORTS];

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      logic rdy;
      flit_fifo #(.DEPTH(DEPTH)) u_fifo (
        .clk, .rst_n,
        .in_valid(in_valid[p] && in_vc[p] == VC_W'(v)), .in_flit(in_flit[p]), .in_ready(rdy),
        .out_valid(f_valid[p*NUM_VC+v]), .out_flit(f_flit[p*NUM_VC+v]),
        .out_ready(f_pop[p*NUM_VC+v]), .empty(f_empty[p*NUM_VC+v])
      );
      assign in_ready[p][v] = rdy;
    end
  end

  assign empty = &f_empty;

  function automatic logic [PW-1:0] xy_route(logic [COORD_W-1:0] dst);
    int dx, dy;
    dx = int'(dst) % int'(MESH_X);
    dy = int'(dst) / int'(MESH_X);
    if (dx > int'(MY_X))      return PW'(P_XP);
    else if (dx < int'(MY_X)) return PW'(P_XM);
    else if (dy > int'(MY_Y)) return PW'(P_YP);
    else if (dy < int'(MY_Y)) return PW'(P_YM);
    else                      return PW'(P_LOCAL);
  endfunction

  // Requests: a queue whose packet holds (o, v) may send if o's VC v has
  // room; a head flit may also take a free (o, v).
  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      head_flit_t h;
      int unsigned v, o;
      h       = head_flit_t'(f_flit[q]);
      v       = q % NUM_VC;
      want[q] = routed_q[q] ? route_q[q] : xy_route(h.dst);
      o       = int'(want[q]);
      req[q]  = f_valid[q] && out_ready[o][v] &&
                (routed_q[q] || (h.ftype == FLIT_HEAD && !locked_q[o * NUM_VC + v]));
    end
  end

  // Stage 1: one VC per input. Stage 2: one input per output.
  always_comb begin
    int unsigned v, i;
    v = 0;
    i = 0;
    for (int p = 0; p < NPORTS; p++) begin
      sel_v[p]  = 1'b0;
      sel_vc[p] = '0;
      sel_o[p]  = '0;
      for (int k = 0; k < NUM_VC; k++) begin
        v = (int'(rr_in_q[p]) + k) % NUM_VC;
        if (!sel_v[p] && req[p * NUM_VC + v]) begin
          sel_v[p]  = 1'b1;
          sel_vc[p] = VC_W'(v);
          sel_o[p]  = want[p * NUM_VC + v];
        end
      end
    end
    for (int o = 0; o < NPORTS; o++) begin
      grant_v[o]  = 1'b0;
      grant_in[o] = '0;
      for (int k = 0; k < NPORTS; k++) begin
        i = (int'(rr_out_q[o]) + k) % NPORTS;
        if (!grant_v[o] && sel_v[i] && sel_o[i] == PW'(o)) begin
          grant_v[o]  = 1'b1;
          grant_in[o] = PW'(i);
        end
      end
    end
  end

  // Crossbar. A granted request always transfers (its ready was checked).
  always_comb begin
    for (int q = 0; q < NQ; q++) f_pop[q] = 1'b0;
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = grant_v[o];
      out_vc[o]    = sel_vc[grant_in[o]];
      out_flit[o]  = f_flit[int'(grant_in[o]) * NUM_VC + int'(sel_vc[grant_in[o]])];
      if (grant_v[o]) f_pop[int'(grant_in[o]) * NUM_VC + int'(sel_vc[grant_in[o]])] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) begin
        route_q[q]  <= '0;
        routed_q[q] <= 1'b0;
        locked_q[q] <= 1'b0;
      end
      for (int p = 0; p < NPORTS; p++) begin
        rr_in_q[p]  <= '0;
        rr_out_q[p] <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (grant_v[o]) begin
          body_flit_t b;
          int unsigned q, l;
          b = body_flit_t'(out_flit[o]);
          q = int'(grant_in[o]) * NUM_VC + int'(out_vc[o]);
          l = o * NUM_VC + int'(out_vc[o]);
          if (b.ftype == FLIT_TAIL) begin
            locked_q[l] <= 1'b0;
            routed_q[q] <= 1'b0;
          end else if (b.ftype == FLIT_HEAD) begin
            locked_q[l] <= 1'b1;
            routed_q[q] <= 1'b1;
            route_q[q]  <= PW'(o);
          end
          rr_in_q[grant_in[o]] <= VC_W'((int'(out_vc[o]) + 1) % NUM_VC);
          rr_out_q[o]          <= PW'((int'(grant_in[o]) + 1) % NPORTS);
        end
      end
    end
  end

  // Each input sends at most one flit per cycle.
  for (genvar p = 0; p < NPORTS; p++) begin : g_chk
    logic [NPORTS-1:0] hits;
    always_comb for (int o = 0; o < NPORTS; o++) hits[o] = grant_v[o] && grant_in[o] == PW'(p);
    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hits));
  end
endmodule
