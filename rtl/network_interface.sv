// network_interface: flit buffering between a core and its router.
//
// Two independent FIFOs with valid/ready on both sides: the injection queue
// takes flits from the packet generator and offers them to the router's
// local input; the ejection queue takes flits from the router's local output
// and offers them to the spike packet decoder. Each FIFO accepts and delivers
// one flit per cycle; a flit written in one cycle can be read the next.
// The published core only names this block; the FIFO structure and DEPTH
// are this design's choice. `empty` is high when both queues are empty.
// Virtual channels: `noc_tx_vc` is the VC of the flit offered to the router,
// taken from the vc field of a head flit and held for the rest of its packet
// (a register updated when the head leaves). `noc_tx_ready` means that VC
// has room. Flits arriving from the router are accepted on any VC.
module network_interface
  import unispike_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // core -> network
  input  logic              core_tx_valid,
  input  logic [FLIT_W-1:0] core_tx_flit,
  output logic              core_tx_ready,
  output logic              noc_tx_valid,
  output logic [FLIT_W-1:0] noc_tx_flit,
  output logic [VC_W-1:0]   noc_tx_vc,
  input  logic              noc_tx_ready,
  // network -> core
  input  logic              noc_rx_valid,
  input  logic [FLIT_W-1:0] noc_rx_flit,
  output logic              noc_rx_ready,
  output logic              core_rx_valid,
  output logic [FLIT_W-1:0] core_rx_flit,
  input  logic              core_rx_ready,
  output logic              empty
);
  logic tx_empty, rx_empty;

  flit_fifo #(.DEPTH(DEPTH)) u_tx (
    .clk, .rst_n,
    .in_valid(core_tx_valid), .in_flit(core_tx_flit), .in_ready(core_tx_ready),
    .out_valid(noc_tx_valid), .out_flit(noc_tx_flit), .out_ready(noc_tx_ready),
    .empty(tx_empty)
  );

  flit_fifo #(.DEPTH(DEPTH)) u_rx (
    .clk, .rst_n,
    .in_valid(noc_rx_valid), .in_flit(noc_rx_flit), .in_ready(noc_rx_ready),
    .out_valid(core_rx_valid), .out_flit(core_rx_flit), .out_ready(core_rx_ready),
    .empty(rx_empty)
  );

  assign empty = tx_empty && rx_empty;

  // VC of the packet being injected.
  head_flit_t       tx_h;
  logic [VC_W-1:0]  vc_q;
  assign tx_h      = head_flit_t'(noc_tx_flit);
  assign noc_tx_vc = (tx_h.ftype == FLIT_HEAD) ? tx_h.vc : vc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                                   vc_q <= '0;
    else if (noc_tx_valid && noc_tx_ready && tx_h.ftype == FLIT_HEAD) vc_q <= tx_h.vc;
  end
endmodule
