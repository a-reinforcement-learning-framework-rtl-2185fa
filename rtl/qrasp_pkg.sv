// qrasp_pkg: types, constants and small helper functions shared by the Q-RASP
// network-on-chip RTL.
//
// Sizes taken from the evaluated platform: an 8x8 mesh (64 nodes), 4 virtual
// channels per port, 4-flit buffers per VC, 128-bit flits, Q-values in
// unsigned fixed point with 6 integer and 4 fractional bits, and a
// 4-entry learning-packet queue. Ports are numbered N=0, E=1, S=2, W=3 as in
// the route-number table (input x output, 12 mesh routes numbered 0..11);
// the local (processing element) port is 4.
//
// Own choices: node id = row*MESH_X + col with rows growing to the south and
// columns to the east; the route codes for packets entering from the local
// port (12..15 = local->N/E/S/W) extend the 12 mesh routes; learning-rate,
// discount and region weight are stored as fractions (alpha, gamma with 8
// fractional bits, mu with 4 fractional bits so that the cost multiplier is
// 4x4 bits).
package qrasp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned MAX_NODES = 64;           // largest mesh supported (8x8)
  localparam int unsigned NODE_W    = 6;            // node id width
  localparam int unsigned COORD_W   = 3;            // row / column width (up to 8)
  localparam int unsigned NUM_PORTS = 5;            // N, E, S, W, local
  localparam int unsigned NUM_VC    = 4;            // virtual channels per port
  localparam int unsigned VC_W      = 2;
  localparam int unsigned FLIT_W    = 128;          // flit size in bits
  localparam int unsigned QW        = 10;           // Q-value width: 6 integer + 4 fraction
  localparam int unsigned QF        = 4;            // fractional bits of Q-values and costs
  localparam int unsigned ROUTE_W   = 4;            // route code 0..15
  localparam int unsigned PAYLOAD_W = FLIT_W - MAX_NODES - 2*NODE_W;

  typedef logic [QW-1:0]        qval_t;
  typedef logic [NODE_W-1:0]    node_t;
  typedef logic [COORD_W-1:0]   coord_t;
  typedef logic [MAX_NODES-1:0] nmask_t;

  typedef enum logic [2:0] {
    P_N = 3'd0,
    P_E = 3'd1,
    P_S = 3'd2,
    P_W = 3'd3,
    P_L = 3'd4
  } port_e;

  // Head flit data layout (128 bits). Body and tail flits carry raw data.
  typedef struct packed {
    logic [PAYLOAD_W-1:0] payload;   // 52 bits of packet payload
    nmask_t               shared;    // destinations sharing this hop's route (Shared Path Experience)
    node_t                src;
    node_t                dest;
  } head_t;

  // One link cycle of the data network.
  typedef struct packed {
    logic              valid;
    logic              head;
    logic              tail;
    logic [VC_W-1:0]   vc;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Credit returned upstream when a flit leaves an input VC buffer.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  // Single-flit learning packet on the dedicated learning link: the cost q_y
  // seen at the downstream router and its estimate min_z Q_y(dest, z).
  typedef struct packed {
    logic  valid;
    node_t dest;
    qval_t cost;
    qval_t est;
  } lpkt_t;

  // One row of the Q-table: Q-values for the horizontal and the vertical
  // neighbour, and the Route column (valid bit + route code).
  typedef struct packed {
    qval_t              qh;
    qval_t              qv;
    logic               rvalid;
    logic [ROUTE_W-1:0] route;
  } qrow_t;

  // Per-router event pulses, for observing the mechanisms in simulation.
  typedef struct packed {
    logic lrn_rx;        // a learning packet updated a Q-value
    logic shared_tx;     // a shared-path learning packet was queued
    logic lq_drop;       // a learning packet was dropped, queue full
    logic nonxy;         // a packet was sent vertically though a horizontal hop was also minimal
    logic credit_stall;  // a flit with an output VC waited for a credit
    logic va_stall;      // a head flit found no free output VC
    logic vc_set0;       // an output VC of the north/level set was allocated
    logic vc_set1;       // an output VC of the southbound set was allocated
  } router_ev_t;

  // Route number for mesh inputs (input-major, outputs in N,E,S,W order with
  // the U-turn skipped); 12+out for local inputs.
  function automatic logic [ROUTE_W-1:0] route_code(port_e in_p, port_e out_p);
    logic [3:0] i, o;
    i = 4'(in_p);
    o = 4'(out_p);
    if (in_p == P_L) return 4'd12 + o;
    return 4'(i * 4'd3 + ((o < i) ? o : (o - 4'd1)));
  endfunction

  function automatic port_e opposite(port_e p);
    case (p)
      P_N:     return P_S;
      P_S:     return P_N;
      P_E:     return P_W;
      P_W:     return P_E;
      default: return P_L;
    endcase
  endfunction

endpackage
