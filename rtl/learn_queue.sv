// learn_queue: builds the learning packets a router returns to its upstream
// neighbour and buffers them for the dedicated learning link.
//
// When a head flit arrives on the input port this queue serves, the router
// presents gen_valid with the packet's destination d, the cost q_y computed
// by the cost unit, and the shared-route mask carried by the head flit (the
// destinations whose Route column in the upstream router holds the same
// route as this packet). In that cycle the queue writes, in order:
//   1. the learning packet for d:  {d,  q_y, min_z Q_y(d, z)}
//   2. one learning packet per destination d' of the mask, lowest id first:
//                                  {d', q_y, min_z Q_y(d', z)}
// as far as free entries allow (entries freed by this cycle's send count).
// Packets that do not fit are dropped; drop_cnt says how many. One packet
// leaves per cycle on lrn_out, registered; the learning link has no
// back-pressure.
//
// Follows the paper: single-flit learning packets, the same cost for the
// shared updates, the estimates for d and each route-sharing d', and a queue
// of 4 entries whose size trades update rate against storage. Own choices:
// all packets of one arrival are written in the same cycle, the primary
// packet first, and the overflow policy (drop the newest).
module learn_queue
  import qrasp_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   gen_valid,
  input  node_t  gen_dest,
  input  qval_t  gen_cost,
  input  nmask_t gen_mask,
  input  qval_t  est_all [MAX_NODES],
  output lpkt_t  lrn_out,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [NODE_W:0] drop_cnt,       // packets dropped this cycle
  output logic [$clog2(DEPTH+1)-1:0] shared_cnt  // shared packets written this cycle
);

  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  lpkt_t q [DEPTH];
  lpkt_t cand [DEPTH];
  lpkt_t nq [DEPTH];
  logic [CW-1:0] ncand, nfree, npush, nkeep;
  logic [NODE_W:0] want;

  always_comb begin
    // candidates: primary, then the first DEPTH-1 destinations of the mask
    for (int i = 0; i < DEPTH; i++) cand[i] = '0;
    ncand = '0;
    want  = '0;
    if (gen_valid) begin
      cand[0] = '{valid: 1'b1, dest: gen_dest, cost: gen_cost, est: est_all[gen_dest]};
      ncand   = CW'(1);
      want    = (NODE_W+1)'(1);
      for (int d = 0; d < MAX_NODES; d++)
        if (gen_mask[d]) begin
          want = want + 1'b1;
          if (ncand < CW'(DEPTH)) begin
            cand[IW'(ncand)] = '{valid: 1'b1, dest: node_t'(d), cost: gen_cost, est: est_all[d]};
            ncand = ncand + 1'b1;
          end
        end
    end

    // send one, keep the rest, append as many candidates as fit
    nkeep = (count != '0) ? count - 1'b1 : '0;
    nfree = CW'(DEPTH) - nkeep;
    npush = (ncand < nfree) ? ncand : nfree;
    for (int i = 0; i < DEPTH; i++) nq[i] = '0;
    for (int i = 0; i < DEPTH - 1; i++)
      if (CW'(i) < nkeep) nq[i] = q[i+1];
    for (int j = 0; j < DEPTH; j++)
      if (CW'(j) < npush) nq[IW'(nkeep + CW'(j))] = cand[j];

    drop_cnt   = want - (NODE_W+1)'(npush);
    shared_cnt = (npush != '0) ? npush - 1'b1 : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
      count   <= '0;
      lrn_out <= '0;
    end else begin
      lrn_out <= (count != '0) ? q[0] : '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= nq[i];
      count <= nkeep + npush;
    end
  end

  // the learning link carries one packet per cycle
  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule
