// qrasp_noc: a MESH_X x MESH_Y 2D-mesh network-on-chip routed by Q-RASP.
//
// One qrasp_router per node, node id = row*MESH_X + col (row 0 at the north
// edge, column 0 at the west edge). Neighbouring routers are joined by a data
// link in each direction (flit forward, credit backward) and by a dedicated
// learning link that carries learning packets from the downstream router back
// to the upstream one, so learning never competes with data flits. Links on
// the mesh edge are tied off; minimal routing never uses them.
//
// The processing elements are outside: for every node the top exposes the
// local input port (inj_flit in, inj_credit out) and the local output port
// (ej_flit out, ej_credit in). A source must follow the router's VC rule: it
// starts a packet on a VC only when all DEPTH credits of that VC are back and
// the previous packet on it has ended, and it sends a flit only with a credit.
// A sink returns one credit per flit. ev[n] gives per-cycle event pulses of
// router n for observation.
//
// Follows the paper: 8x8 mesh, one router and one PE per node, credit-based
// flow control, dedicated learning links. Own choices: node numbering and
// the local-port interface.
module qrasp_noc
  import qrasp_pkg::*;
#(
  parameter int unsigned MESH_X   = 8,
  parameter int unsigned MESH_Y   = 8,
  parameter int unsigned DEPTH    = 4,
  parameter int unsigned LQ_DEPTH = 4,
  parameter logic [7:0]  ALPHA    = 8'd179,
  parameter logic [7:0]  GAMMA    = 8'd230,
  parameter logic [3:0]  MU       = 4'd2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  flit_t      inj_flit   [MESH_X*MESH_Y],
  output credit_t    inj_credit [MESH_X*MESH_Y],
  output flit_t      ej_flit    [MESH_X*MESH_Y],
  input  credit_t    ej_credit  [MESH_X*MESH_Y],
  output router_ev_t ev         [MESH_X*MESH_Y]
);

  localparam int unsigned N = MESH_X * MESH_Y;

  flit_t   r_in_flit    [N][NUM_PORTS];
  credit_t r_out_credit [N][NUM_PORTS];
  flit_t   r_out_flit   [N][NUM_PORTS];
  credit_t r_in_credit  [N][NUM_PORTS];
  lpkt_t   r_lrn_in     [N][4];
  lpkt_t   r_lrn_out    [N][4];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_row
    for (genvar x = 0; x < MESH_X; x++) begin : g_col
      localparam int unsigned ID = y * MESH_X + x;

      qrasp_router #(
        .MESH_X (MESH_X), .MESH_Y (MESH_Y),
        .DEPTH  (DEPTH),  .LQ_DEPTH (LQ_DEPTH),
        .ALPHA  (ALPHA),  .GAMMA (GAMMA), .MU (MU)
      ) u_router (
        .clk        (clk),
        .rst_n      (rst_n),
        .my_x       (coord_t'(x)),
        .my_y       (coord_t'(y)),
        .in_flit    (r_in_flit[ID]),
        .out_credit (r_out_credit[ID]),
        .out_flit   (r_out_flit[ID]),
        .in_credit  (r_in_credit[ID]),
        .lrn_in     (r_lrn_in[ID]),
        .lrn_out    (r_lrn_out[ID]),
        .ev         (ev[ID])
      );

      // local port
      assign r_in_flit[ID][P_L]   = inj_flit[ID];
      assign inj_credit[ID]       = r_out_credit[ID][P_L];
      assign ej_flit[ID]          = r_out_flit[ID][P_L];
      assign r_in_credit[ID][P_L] = ej_credit[ID];

      // north neighbour
      if (y > 0) begin : g_n
        assign r_in_flit[ID][P_N]   = r_out_flit[ID-MESH_X][P_S];
        assign r_in_credit[ID][P_N] = r_out_credit[ID-MESH_X][P_S];
        assign r_lrn_in[ID][int'(P_N)]    = r_lrn_out[ID-MESH_X][int'(P_S)];
      end else begin : g_n_edge
        assign r_in_flit[ID][P_N]   = '0;
        assign r_in_credit[ID][P_N] = '0;
        assign r_lrn_in[ID][int'(P_N)]    = '0;
      end
      // south neighbour
      if (y < MESH_Y-1) begin : g_s
        assign r_in_flit[ID][P_S]   = r_out_flit[ID+MESH_X][P_N];
        assign r_in_credit[ID][P_S] = r_out_credit[ID+MESH_X][P_N];
        assign r_lrn_in[ID][int'(P_S)]    = r_lrn_out[ID+MESH_X][int'(P_N)];
      end else begin : g_s_edge
        assign r_in_flit[ID][P_S]   = '0;
        assign r_in_credit[ID][P_S] = '0;
        assign r_lrn_in[ID][int'(P_S)]    = '0;
      end
      // west neighbour
      if (x > 0) begin : g_w
        assign r_in_flit[ID][P_W]   = r_out_flit[ID-1][P_E];
        assign r_in_credit[ID][P_W] = r_out_credit[ID-1][P_E];
        assign r_lrn_in[ID][int'(P_W)]    = r_lrn_out[ID-1][int'(P_E)];
      end else begin : g_w_edge
        assign r_in_flit[ID][P_W]   = '0;
        assign r_in_credit[ID][P_W] = '0;
        assign r_lrn_in[ID][int'(P_W)]    = '0;
      end
      // east neighbour
      if (x < MESH_X-1) begin : g_e
        assign r_in_flit[ID][P_E]   = r_out_flit[ID+1][P_W];
        assign r_in_credit[ID][P_E] = r_out_credit[ID+1][P_W];
        assign r_lrn_in[ID][int'(P_E)]    = r_lrn_out[ID+1][int'(P_W)];
      end else begin : g_e_edge
        assign r_in_flit[ID][P_E]   = '0;
        assign r_in_credit[ID][P_E] = '0;
        assign r_lrn_in[ID][int'(P_E)]    = '0;
      end
    end
  end

endmodule
