// unispike_pkg: types and constants shared by the UniSpike core and mesh.
//
// The core holds N_NEURONS neurons. 512 is this design's reading of the
// per-core memory budget: a 32.625 KB post-synaptic connection memory is
// exactly 512 entries of {1-bit flag, 9-bit coordinate, 512-bit bitmap},
// and a 1.125 KB checking table is 512 entries of {9-bit barrier, 9-bit
// start address}. The mesh holds 512 cores addressed by a 9-bit
// coordinate {y[3:0], x[4:0]} (32 x 16 mesh, own choice).
//
// Flits are 32 bits. The field order of the head and body/tail flits is the
// published one; the field widths are this design's choice:
//   head : type[31:30] vc[29:28] port[27:25] dst[24:16] src[15:7] rsvd[6:0]
//   body : type[31:30] synapse_id[29:21] delay[20:17] rsvd[16:0]
package unispike_pkg;

  localparam int unsigned FLIT_W   = 32;
  localparam int unsigned COORD_W  = 9;
  localparam int unsigned SYNID_W  = 9;
  localparam int unsigned WEIGHT_W = 8;
  localparam int unsigned WS_W     = 16;
  // Virtual channels per router port; a packet keeps one VC end to end.
  localparam int unsigned NUM_VC   = 4;
  localparam int unsigned VC_W     = 2;

  typedef enum logic [1:0] {
    FLIT_NONE = 2'b00,
    FLIT_HEAD = 2'b01,
    FLIT_BODY = 2'b10,
    FLIT_TAIL = 2'b11
  } flit_type_e;

  typedef struct packed {
    flit_type_e         ftype;
    logic [1:0]         vc;
    logic [2:0]         port;
    logic [COORD_W-1:0] dst;
    logic [COORD_W-1:0] src;
    logic [6:0]         rsvd;
  } head_flit_t;

  typedef struct packed {
    flit_type_e         ftype;
    logic [SYNID_W-1:0] synapse_id;
    logic [3:0]         delay;
    logic [16:0]        rsvd;
  } body_flit_t;

  // Per-neuron state word: 48 bits, so 512 neurons fill 3 KB.
  typedef struct packed {
    logic signed [23:0] v;      // membrane potential
    logic        [15:0] vth;    // firing threshold
    logic        [3:0]  leak;   // leak shift, 0 = no leak
    logic        [3:0]  rsvd;
  } neuron_state_t;

  localparam int unsigned NSTATE_W = $bits(neuron_state_t);

  // Configuration targets inside a core.
  typedef enum logic [2:0] {
    CFG_CT     = 3'd0,  // checking table entry {valid, barrier, start}
    CFG_CONN   = 3'd1,  // post-synaptic connection entry {flag, dst, bitmap}
    CFG_AXBASE = 3'd2,  // axon base per source core
    CFG_AXON   = 3'd3,  // axon {ptr, len}
    CFG_SYN    = 3'd4,  // synapse {neuron, weight}
    CFG_NSTATE = 3'd5   // neuron state word
  } cfg_sel_e;

  localparam int unsigned CFG_AW = 16;

  // Router ports.
  localparam int unsigned NPORTS = 5;
  localparam int unsigned P_LOCAL = 0, P_XP = 1, P_XM = 2, P_YP = 3, P_YM = 4;

  function automatic head_flit_t make_head(logic [COORD_W-1:0] dst, logic [COORD_W-1:0] src);
    head_flit_t h;
    h = '0;
    h.ftype = FLIT_HEAD;
    h.vc    = dst[VC_W-1:0];  // VC chosen by destination
    h.dst   = dst;
    h.src   = src;
    return h;
  endfunction

  function automatic body_flit_t make_body(logic [SYNID_W-1:0] id, logic is_tail);
    body_flit_t b;
    b = '0;
    b.ftype      = is_tail ? FLIT_TAIL : FLIT_BODY;
    b.synapse_id = id;
    return b;
  endfunction

endpackage
