// q_table: the Q-RASP routing table of one router.
//
// One row per destination node holds two Q-values, for the horizontal and
// the vertical minimal neighbour, and the Route column: the route code
// (input port, output port) last used by a packet to that destination. With
// minimal routing a destination has at most one horizontal and one vertical
// productive direction, so two Q-value columns suffice.
//
// Functions, all with combinational read:
//  * route select (one per input port): the minimum-selection rule. For a
//    destination needing both a horizontal and a vertical hop, the neighbour
//    with the smaller Q-value is chosen (ties go to the horizontal one); with
//    one productive direction it is taken; the own node selects the local
//    port. rs_opts returns the set of minimal options (used for the region
//    cost) and rs_nonxy flags a vertical choice where horizontal was possible.
//  * estimates: est_all[d] = min over the minimal options of Q(d, .), 0 for
//    the own node; this is the value returned to the upstream router.
//  * shared-route mask (one per output port): the destinations, other than
//    the packet's own, whose Route column holds the given route code.
// Writes, on the clock edge:
//  * route write (one per input port): Route column of a destination.
//  * Q-value update (one per mesh port): a learning packet received from the
//    neighbour in direction p updates Q(dest, p) with q_update (Eq. 2).
//    East/West packets update the horizontal column, North/South the
//    vertical one, so two updates never hit the same Q-value.
//
// Follows the paper: two Q-value columns plus a Route column, 10-bit Q-values
// with 4 fractional bits, minimum selection, update rule and the matching on
// the sender's Route column (the paper's four-router example). Own choices:
// the table has MESH_X*MESH_Y rows indexed by node id (the own row is unused,
// the paper counts 63 rows); the Route column is 5 bits (valid + 4-bit code)
// because the printed route numbers run to 11 and local inputs need codes
// too, where the paper counts 3 bits; Q-values reset to 0; ties select the
// horizontal neighbour. The router's coordinates are inputs (strapped by the
// mesh) so that one table and router design serves every tile.
module q_table
  import qrasp_pkg::*;
#(
  parameter int unsigned MESH_X = 8,
  parameter int unsigned MESH_Y = 8,
  parameter logic [7:0]  ALPHA  = 8'd179,
  parameter logic [7:0]  GAMMA  = 8'd230
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  coord_t               my_x,      // column of this router
  input  coord_t               my_y,      // row of this router
  // route select
  input  node_t                rs_dest  [NUM_PORTS],
  output port_e                rs_out   [NUM_PORTS],
  output logic [NUM_PORTS-1:0] rs_opts  [NUM_PORTS],
  output logic                 rs_nonxy [NUM_PORTS],
  // Route column write
  input  logic                 rw_en    [NUM_PORTS],
  input  node_t                rw_dest  [NUM_PORTS],
  input  logic [ROUTE_W-1:0]   rw_code  [NUM_PORTS],
  // shared-route mask
  input  node_t                mk_dest  [NUM_PORTS],
  input  logic [ROUTE_W-1:0]   mk_code  [NUM_PORTS],
  output nmask_t               mk_mask  [NUM_PORTS],
  // minimum estimates of all rows
  output qval_t                est_all  [MAX_NODES],
  // learning packets from the neighbours (index = direction of the neighbour)
  input  lpkt_t                up       [4],
  // observation read port
  input  node_t                obs_dest,
  output qrow_t                obs_row
);

  localparam int unsigned N    = MESH_X * MESH_Y;
  localparam int unsigned AW   = (N > 1) ? $clog2(N) : 1;   // row address width

  initial begin
    assert (N <= MAX_NODES) else $fatal(1, "mesh larger than MAX_NODES");
  end

  qrow_t tbl [N];

  // row address of a node id (callers check id < N)
  function automatic logic [AW-1:0] ra(node_t d);
    return AW'(d);
  endfunction

  // productive directions of a destination seen from this router
  function automatic logic [NUM_PORTS-1:0] min_opts(node_t d);
    int unsigned dx, dy;
    logic [NUM_PORTS-1:0] o;
    dx = int'(d) % MESH_X;
    dy = int'(d) / MESH_X;
    o  = '0;
    if (dx > int'(my_x)) o[P_E] = 1'b1;
    if (dx < int'(my_x)) o[P_W] = 1'b1;
    if (dy > int'(my_y)) o[P_S] = 1'b1;
    if (dy < int'(my_y)) o[P_N] = 1'b1;
    if (o == '0)   o[P_L] = 1'b1;
    return o;
  endfunction

  // ------------------------------------------------------------ reads
  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      logic [NUM_PORTS-1:0] o;
      logic                 hor, ver;
      qrow_t                r;
      port_e                h_p, v_p;
      o   = min_opts(rs_dest[p]);
      r   = (int'(rs_dest[p]) < N) ? tbl[ra(rs_dest[p])] : '0;
      hor = o[P_E] | o[P_W];
      ver = o[P_N] | o[P_S];
      h_p = o[P_E] ? P_E : P_W;
      v_p = o[P_S] ? P_S : P_N;
      rs_opts[p]  = o;
      rs_nonxy[p] = 1'b0;
      if (hor && ver) begin
        if (r.qv < r.qh) begin
          rs_out[p]   = v_p;
          rs_nonxy[p] = 1'b1;
        end else begin
          rs_out[p] = h_p;
        end
      end else if (hor) rs_out[p] = h_p;
      else if (ver)     rs_out[p] = v_p;
      else              rs_out[p] = P_L;
    end
  end

  always_comb begin
    for (int d = 0; d < MAX_NODES; d++) begin
      logic [NUM_PORTS-1:0] o;
      est_all[d] = '0;
      o = min_opts(node_t'(d));
      if (d < N && !o[P_L]) begin
        if ((o[P_E] | o[P_W]) && (o[P_N] | o[P_S]))
          est_all[d] = (tbl[d].qv < tbl[d].qh) ? tbl[d].qv : tbl[d].qh;
        else if (o[P_E] | o[P_W])
          est_all[d] = tbl[d].qh;
        else
          est_all[d] = tbl[d].qv;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      mk_mask[p] = '0;
      for (int d = 0; d < N; d++)
        mk_mask[p][d] = tbl[d].rvalid && tbl[d].route == mk_code[p] && node_t'(d) != mk_dest[p];
    end
  end

  assign obs_row = (int'(obs_dest) < N) ? tbl[ra(obs_dest)] : '0;

  // ------------------------------------------------------------ updates
  qval_t q_new [4];

  for (genvar g = 0; g < 4; g++) begin : g_upd
    qval_t q_old;
    assign q_old = (int'(up[g].dest) >= N) ? '0 :
                   (g == P_E || g == P_W) ? tbl[ra(up[g].dest)].qh : tbl[ra(up[g].dest)].qv;
    q_update #(.ALPHA(ALPHA), .GAMMA(GAMMA)) u_q_update (
      .q_old (q_old),
      .cost  (up[g].cost),
      .est   (up[g].est),
      .q_new (q_new[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < N; d++) tbl[d] <= '0;
    end else begin
      for (int p = 0; p < NUM_PORTS; p++)
        if (rw_en[p] && int'(rw_dest[p]) < N) begin
          tbl[ra(rw_dest[p])].rvalid <= 1'b1;
          tbl[ra(rw_dest[p])].route  <= rw_code[p];
        end
      for (int g = 0; g < 4; g++)
        if (up[g].valid && int'(up[g].dest) < N) begin
          if (g == int'(P_E) || g == int'(P_W)) tbl[ra(up[g].dest)].qh <= q_new[g];
          else                      tbl[ra(up[g].dest)].qv <= q_new[g];
        end
    end
  end

endmodule
