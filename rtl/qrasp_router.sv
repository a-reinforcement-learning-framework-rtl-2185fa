// qrasp_router: one router of the Q-RASP mesh network-on-chip.
//
// A 5-port (N, E, S, W, local) input-buffered virtual-channel router with
// credit-based flow control and Q-learning routing:
//
//  * Arrival. A flit on in_flit[p] is written into the VC buffer of port p.
//    For a head flit, the Q-table selects the output port right away
//    (minimum-selection rule over the minimal directions), the Route column
//    of the destination is set to the route code (p, out), and the cost unit
//    computes q_y from the occupied VCs of port p and the reserved VCs of the
//    chosen output and of all minimal options. On a mesh port this cost, the
//    destination and the head's shared-route mask go to the learn_queue of
//    port p, which returns learning packets to the upstream router over the
//    dedicated learning link lrn_out[p].
//  * VC allocation (one cycle later). A head flit at the front of its VC
//    requests a VC of its output port; per output a round-robin arbiter picks
//    one request per cycle and gives it the lowest free VC of the allowed
//    set. Set 0 (VCs 0..NUM_VC/2-1) carries packets that no longer go south
//    (north-bound or level), set 1 (the upper half) packets that still go
//    south. Within a set every minimal turn is
//    allowed and turns into the other vertical direction cannot happen, so
//    each set is free of turn cycles; a packet moves from set 1 to set 0 only
//    when it reaches its destination row. Ejection may use any VC. A VC is
//    free when it is not reserved and all its credits are back.
//  * Switch allocation and traversal (next cycle). Each input port picks one
//    VC that owns an output VC with a credit (round robin), each output picks
//    one input port (round robin). The winning flit leaves on out_flit, a
//    credit is returned on out_credit, and the tail releases the output VC.
//    A head flit leaving on a mesh port carries the shared-route mask: the
//    destinations whose Route column holds the same route code.
//  * Learning. A learning packet on lrn_in[o] comes from the neighbour in
//    direction o and updates Q(dest, o) in the Q-table.
//
// Timing: a head flit written at edge t requests a VC after edge t, is
// switched after edge t+1 and is on out_flit after edge t+2 (3 cycles per
// hop without contention); body flits follow one per cycle. The learning
// packet for a head arriving at edge t is on lrn_out after edge t+1.
//
// Follows the paper: Q-table routing and update, the cost of Eq. (3)-(5),
// the Route column and shared-path learning packets, a 4-entry learning
// queue, dedicated learning links, 4 VCs of 4 flits per port, credits,
// two VC sets with opposite vertical turn restrictions. Own choices: the
// pipeline, the allocators, routing at arrival, and the VC-set rule above
// (the paper says only that south-first turns are restricted in one set and
// north-first turns in the other). The router's coordinates are strap
// inputs rather than parameters, so all tiles of the mesh are one design.
module qrasp_router
  import qrasp_pkg::*;
#(
  parameter int unsigned MESH_X   = 8,
  parameter int unsigned MESH_Y   = 8,
  parameter int unsigned DEPTH    = 4,        // flits per VC
  parameter int unsigned LQ_DEPTH = 4,        // learning-packet queue entries
  parameter logic [7:0]  ALPHA    = 8'd179,   // 0.70
  parameter logic [7:0]  GAMMA    = 8'd230,   // 0.90
  parameter logic [3:0]  MU       = 4'd2      // 0.125 (paper: 0.1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  coord_t     my_x,                   // column of this router (strap)
  input  coord_t     my_y,                   // row of this router (strap)
  input  flit_t      in_flit    [NUM_PORTS],
  output credit_t    out_credit [NUM_PORTS],
  output flit_t      out_flit   [NUM_PORTS],
  input  credit_t    in_credit  [NUM_PORTS],
  input  lpkt_t      lrn_in     [4],
  output lpkt_t      lrn_out    [4],
  output router_ev_t ev
);

  localparam int unsigned CW   = $clog2(DEPTH+1);
  localparam int unsigned NREQ = NUM_PORTS * NUM_VC;
  localparam int unsigned HALF = NUM_VC / 2;

  // ------------------------------------------------------------ input buffers
  flit_t         front [NUM_PORTS][NUM_VC];
  logic          empty [NUM_PORTS][NUM_VC];
  logic [CW-1:0] cnt   [NUM_PORTS][NUM_VC];
  logic          pop   [NUM_PORTS][NUM_VC];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_ib
    vc_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_flit (in_flit[p]),
      .pop     (pop[p]),
      .front   (front[p]),
      .empty   (empty[p]),
      .cnt     (cnt[p])
    );
  end

  // per input VC state
  port_e           vc_out   [NUM_PORTS][NUM_VC];   // output port chosen at arrival
  logic            vc_south [NUM_PORTS][NUM_VC];   // packet still travels south (VC set 1)
  logic            vc_alloc [NUM_PORTS][NUM_VC];   // owns an output VC
  logic [VC_W-1:0] vc_ovc   [NUM_PORTS][NUM_VC];

  // per output VC state
  logic [NUM_VC-1:0] resv    [NUM_PORTS];          // VC reservation table
  logic [CW-1:0]     credits [NUM_PORTS][NUM_VC];

  // ------------------------------------------------------------ Q-table
  node_t                rs_dest  [NUM_PORTS];
  port_e                rs_out   [NUM_PORTS];
  logic [NUM_PORTS-1:0] rs_opts  [NUM_PORTS];
  logic                 rs_nonxy [NUM_PORTS];
  logic                 rw_en    [NUM_PORTS];
  node_t                rw_dest  [NUM_PORTS];
  logic [ROUTE_W-1:0]   rw_code  [NUM_PORTS];
  node_t                mk_dest  [NUM_PORTS];
  logic [ROUTE_W-1:0]   mk_code  [NUM_PORTS];
  nmask_t               mk_mask  [NUM_PORTS];
  qval_t                est_all  [MAX_NODES];
  qrow_t                obs_row;

  q_table #(
    .MESH_X (MESH_X), .MESH_Y (MESH_Y),
    .ALPHA  (ALPHA),  .GAMMA  (GAMMA)
  ) u_qtable (
    .clk      (clk),
    .rst_n    (rst_n),
    .my_x     (my_x),
    .my_y     (my_y),
    .rs_dest  (rs_dest),
    .rs_out   (rs_out),
    .rs_opts  (rs_opts),
    .rs_nonxy (rs_nonxy),
    .rw_en    (rw_en),
    .rw_dest  (rw_dest),
    .rw_code  (rw_code),
    .mk_dest  (mk_dest),
    .mk_code  (mk_code),
    .mk_mask  (mk_mask),
    .est_all  (est_all),
    .up       (lrn_in),
    .obs_dest (node_t'(0)),
    .obs_row  (obs_row)
  );

  // ------------------------------------------------------------ arrival
  logic   arr_head [NUM_PORTS];
  head_t  arr_hd   [NUM_PORTS];
  qval_t  arr_cost [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_arr
    logic [2:0] r_i, r_o;
    logic [3:0] q_p, q_r;

    assign arr_head[p] = in_flit[p].valid && in_flit[p].head;
    assign arr_hd[p]   = head_t'(in_flit[p].data);
    assign rs_dest[p]  = arr_hd[p].dest;
    assign rw_en[p]    = arr_head[p] && rs_out[p] != P_L;
    assign rw_dest[p]  = arr_hd[p].dest;
    assign rw_code[p]  = route_code(port_e'(p), rs_out[p]);

    cost_unit #(.CNT_W(CW), .MU(MU)) u_cost (
      .in_cnt    (cnt[p]),
      .arr_valid (in_flit[p].valid),
      .arr_vc    (in_flit[p].vc),
      .out_resv  (resv),
      .sel_out   (rs_out[p]),
      .opts      (rs_opts[p]),
      .r_i       (r_i),
      .r_o       (r_o),
      .q_p       (q_p),
      .q_r       (q_r),
      .q_y       (arr_cost[p])
    );
  end

  // learning queues, one per mesh input port
  logic [NODE_W:0]             lq_drop   [4];
  logic [$clog2(LQ_DEPTH+1)-1:0] lq_shared [4];
  logic [$clog2(LQ_DEPTH+1)-1:0] lq_count  [4];

  for (genvar p = 0; p < 4; p++) begin : g_lq
    learn_queue #(.DEPTH(LQ_DEPTH)) u_lq (
      .clk        (clk),
      .rst_n      (rst_n),
      .gen_valid  (arr_head[p]),
      .gen_dest   (arr_hd[p].dest),
      .gen_cost   (arr_cost[p]),
      .gen_mask   (arr_hd[p].shared),
      .est_all    (est_all),
      .lrn_out    (lrn_out[p]),
      .count      (lq_count[p]),
      .drop_cnt   (lq_drop[p]),
      .shared_cnt (lq_shared[p])
    );
  end

  // ------------------------------------------------------------ VC allocation
  function automatic logic vc_in_set(int unsigned w, logic south, port_e o);
    if (o == P_L) return 1'b1;
    return south ? (w >= HALF) : (w < HALF);
  endfunction

  logic [NREQ-1:0]   va_req   [NUM_PORTS];
  logic [NREQ-1:0]   va_grant [NUM_PORTS];
  logic [$clog2(NREQ)-1:0] va_idx [NUM_PORTS];
  logic              va_any   [NUM_PORTS];
  logic [VC_W-1:0]   va_vc    [NUM_PORTS];
  logic              va_blocked;

  always_comb begin
    logic has_free;
    va_blocked = 1'b0;
    has_free   = 1'b0;
    for (int o = 0; o < NUM_PORTS; o++) begin
      va_req[o] = '0;
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VC; v++)
          if (!empty[p][v] && front[p][v].head && !vc_alloc[p][v] && vc_out[p][v] == port_e'(o)) begin
            has_free = 1'b0;
            for (int w = 0; w < NUM_VC; w++)
              if (!resv[o][w] && credits[o][w] == CW'(DEPTH) && vc_in_set(w, vc_south[p][v], port_e'(o)))
                has_free = 1'b1;
            if (has_free) va_req[o][p*NUM_VC+v] = 1'b1;
            else          va_blocked = 1'b1;
          end
    end
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_va
    rr_arbiter #(.N(NREQ)) u_arb (
      .clk       (clk),
      .rst_n     (rst_n),
      .req       (va_req[o]),
      .advance   (1'b1),
      .grant     (va_grant[o]),
      .grant_idx (va_idx[o]),
      .any       (va_any[o])
    );

    // lowest free VC of the winner's set
    always_comb begin
      int unsigned wp, wv;
      logic found;
      wp = int'(va_idx[o]) / NUM_VC;
      wv = int'(va_idx[o]) % NUM_VC;
      va_vc[o] = '0;
      found = 1'b0;
      for (int w = 0; w < NUM_VC; w++)
        if (!found && !resv[o][w] && credits[o][w] == CW'(DEPTH) &&
            vc_in_set(w, vc_south[wp][wv], port_e'(o))) begin
          va_vc[o] = VC_W'(w);
          found    = 1'b1;
        end
    end
  end

  // ------------------------------------------------------------ switch allocation
  logic [NUM_VC-1:0]    sa_in_req  [NUM_PORTS];
  logic [NUM_VC-1:0]    sa_in_gnt  [NUM_PORTS];
  logic [VC_W-1:0]      sa_in_idx  [NUM_PORTS];
  logic                 sa_in_any  [NUM_PORTS];
  logic [NUM_PORTS-1:0] sa_out_req [NUM_PORTS];
  logic [NUM_PORTS-1:0] sa_out_gnt [NUM_PORTS];
  logic [2:0]           sa_out_idx [NUM_PORTS];
  logic                 sa_out_any [NUM_PORTS];
  logic                 sa_in_won  [NUM_PORTS];
  logic                 cr_blocked;

  always_comb begin
    cr_blocked = 1'b0;
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        sa_in_req[p][v] = 1'b0;
        if (!empty[p][v] && vc_alloc[p][v]) begin
          if (credits[vc_out[p][v]][vc_ovc[p][v]] != '0) sa_in_req[p][v] = 1'b1;
          else                                           cr_blocked      = 1'b1;
        end
      end
  end

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_sa_in
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk       (clk),
      .rst_n     (rst_n),
      .req       (sa_in_req[p]),
      .advance   (sa_in_won[p]),
      .grant     (sa_in_gnt[p]),
      .grant_idx (sa_in_idx[p]),
      .any       (sa_in_any[p])
    );
  end

  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++)
      for (int p = 0; p < NUM_PORTS; p++)
        sa_out_req[o][p] = sa_in_any[p] && vc_out[p][sa_in_idx[p]] == port_e'(o);
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_sa_out
    rr_arbiter #(.N(NUM_PORTS)) u_arb (
      .clk       (clk),
      .rst_n     (rst_n),
      .req       (sa_out_req[o]),
      .advance   (1'b1),
      .grant     (sa_out_gnt[o]),
      .grant_idx (sa_out_idx[o]),
      .any       (sa_out_any[o])
    );
  end

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      sa_in_won[p] = 1'b0;
      for (int o = 0; o < NUM_PORTS; o++)
        if (sa_out_gnt[o][p]) sa_in_won[p] = 1'b1;
      for (int v = 0; v < NUM_VC; v++)
        pop[p][v] = sa_in_won[p] && sa_in_idx[p] == VC_W'(v);
    end
  end

  // crossbar: the flit each output sends, and the shared-route mask lookup
  flit_t xb_flit [NUM_PORTS];
  logic  xb_tail [NUM_PORTS];

  // shared-route mask request of each output: winner's destination and route
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_mk
    head_t mk_h;
    assign mk_h       = head_t'(front[sa_out_idx[o]][sa_in_idx[sa_out_idx[o]]].data);
    assign mk_dest[o] = mk_h.dest;
    assign mk_code[o] = route_code(port_e'(sa_out_idx[o]), port_e'(o));
  end

  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      int unsigned  wp;
      logic [VC_W-1:0] wv;
      flit_t        f;
      head_t        h;
      wp = int'(sa_out_idx[o]);
      wv = sa_in_idx[wp];
      f  = front[wp][wv];
      h  = head_t'(f.data);
      xb_flit[o] = '0;
      xb_tail[o] = 1'b0;
      if (sa_out_any[o]) begin
        xb_flit[o]       = f;
        xb_flit[o].valid = 1'b1;
        xb_flit[o].vc    = vc_ovc[wp][wv];
        xb_tail[o]       = f.tail;
        if (f.head) begin
          h.shared = (o == int'(P_L)) ? '0 : mk_mask[o];
          xb_flit[o].data = FLIT_W'(h);
        end
      end
    end
  end

  // ------------------------------------------------------------ state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        resv[p]       <= '0;
        out_flit[p]   <= '0;
        out_credit[p] <= '0;
        for (int v = 0; v < NUM_VC; v++) begin
          vc_out[p][v]   <= P_L;
          vc_south[p][v] <= 1'b0;
          vc_alloc[p][v] <= 1'b0;
          vc_ovc[p][v]   <= '0;
          credits[p][v]  <= CW'(DEPTH);
        end
      end
    end else begin
      // arrival: route computed now, kept with the VC
      for (int p = 0; p < NUM_PORTS; p++)
        if (arr_head[p]) begin
          vc_out[p][in_flit[p].vc]   <= rs_out[p];
          vc_south[p][in_flit[p].vc] <= int'(arr_hd[p].dest) / MESH_X > int'(my_y);
          vc_alloc[p][in_flit[p].vc] <= 1'b0;
        end

      // VC allocation
      for (int o = 0; o < NUM_PORTS; o++)
        if (va_any[o]) begin
          vc_alloc[int'(va_idx[o]) / NUM_VC][int'(va_idx[o]) % NUM_VC] <= 1'b1;
          vc_ovc[int'(va_idx[o]) / NUM_VC][int'(va_idx[o]) % NUM_VC]   <= va_vc[o];
          resv[o][va_vc[o]] <= 1'b1;
        end

      // switch traversal
      for (int o = 0; o < NUM_PORTS; o++) begin
        out_flit[o] <= xb_flit[o];
        if (sa_out_any[o] && xb_tail[o]) begin // tail leaves: release the output VC
          resv[o][xb_flit[o].vc] <= 1'b0;
          vc_alloc[sa_out_idx[o]][sa_in_idx[sa_out_idx[o]]] <= 1'b0;
        end
      end

      // credits: returned upstream for popped flits, received from downstream
      for (int p = 0; p < NUM_PORTS; p++) begin
        out_credit[p] <= '{valid: sa_in_won[p], vc: sa_in_idx[p]};
      end
      for (int o = 0; o < NUM_PORTS; o++)
        for (int w = 0; w < NUM_VC; w++)
          credits[o][w] <= credits[o][w]
                           - CW'(sa_out_any[o] && xb_flit[o].vc == VC_W'(w))
                           + CW'(in_credit[o].valid && in_credit[o].vc == VC_W'(w));
    end
  end

  // ------------------------------------------------------------ events
  always_comb begin
    ev = '0;
    for (int g = 0; g < 4; g++) begin
      if (lrn_in[g].valid)     ev.lrn_rx    = 1'b1;
      if (lq_shared[g] != '0)  ev.shared_tx = 1'b1;
      if (lq_drop[g] != '0)    ev.lq_drop   = 1'b1;
    end
    for (int p = 0; p < NUM_PORTS; p++)
      if (arr_head[p] && rs_nonxy[p]) ev.nonxy = 1'b1;
    ev.credit_stall = cr_blocked;
    ev.va_stall     = va_blocked;
    for (int o = 0; o < NUM_PORTS; o++)
      if (va_any[o] && o != int'(P_L)) begin
        if (va_vc[o] < VC_W'(HALF)) ev.vc_set0 = 1'b1;
        else                        ev.vc_set1 = 1'b1;
      end
  end

  // a credit never returns for a VC whose credits are all back
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      in_credit[o].valid |-> credits[o][in_credit[o].vc] < CW'(DEPTH) ||
                             (sa_out_any[o] && xb_flit[o].vc == in_credit[o].vc))
      else $error("router (%0d,%0d): credit overflow on output %0d", my_x, my_y, o);
  end

endmodule
