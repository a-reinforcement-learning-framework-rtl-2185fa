// tb_qrasp_router: self-checking test of one Q-RASP router.
//
// The router under test is the centre of a 3x3 mesh (node 4 at row 1,
// column 1; nodes 0..8 numbered row*3+col). The testbench plays all four
// neighbours and the PE: it drives in_flit, returns a credit one cycle after
// every flit the router sends (or holds them back), and records out_flit,
// out_credit and lrn_out. It checks:
//  1. a single-flit packet injected for node 5 leaves on E exactly two
//     cycles after the edge that wrote it, on VC 0 (set 0: not southbound),
//     with its credit returned to the PE, and with an empty shared mask;
//  2. the next packet, for node 2 (tie -> horizontal, E), carries the shared
//     mask {5}: node 5's Route column holds the same route local->E;
//  3. a head arriving from W for node 8 with mask {2, 5} makes the router
//     send three learning packets back on the W learning link, one per
//     cycle starting one cycle after the arrival: {8}, {2}, {5}, each with
//     cost q_y = r_i + r_o + mu*q_r = 1 + 0 + 0 = 1.0 and estimate 0;
//  4. a learning packet on the E link with cost 10.0 raises Q(8, E) to
//     floor(179*160/256)/16; the next packet for 8 goes S (non-XY), on a
//     VC of set 1 (southbound);
//  5. credit stall: with credits held back, only 4 flits of a 6-flit packet
//     to node 3 leave on W; after the credits return, the other 2 follow,
//     all in order.
module tb_qrasp_router;
  import qrasp_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  coord_t     my_x, my_y;
  flit_t      in_flit    [NUM_PORTS];
  credit_t    out_credit [NUM_PORTS];
  flit_t      out_flit   [NUM_PORTS];
  credit_t    in_credit  [NUM_PORTS];
  lpkt_t      lrn_in     [4];
  lpkt_t      lrn_out    [4];
  router_ev_t ev;

  assign my_x = coord_t'(1);
  assign my_y = coord_t'(1);

  qrasp_router #(.MESH_X(3), .MESH_Y(3)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  logic hold [NUM_PORTS];
  int   owed [NUM_PORTS][NUM_VC];
  flit_t  seen [NUM_PORTS][$];
  longint seen_t [NUM_PORTS][$];
  lpkt_t  lseen [4][$];
  longint lseen_t [4][$];
  int   pe_credits;
  int   n_nonxy, n_cstall;

  // neighbours: record flits, return credits (one per cycle per port)
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int o = 0; o < NUM_PORTS; o++) begin
      in_credit[o] <= '0;
      if (out_flit[o].valid) begin
        seen[o].push_back(out_flit[o]);
        seen_t[o].push_back(cyc);
        owed[o][out_flit[o].vc]++;
      end
      if (!hold[o]) begin
        automatic int first = -1;
        for (int v = NUM_VC-1; v >= 0; v--) if (owed[o][v] > 0) first = v;
        if (first >= 0) owed[o][first]--;
        if (first >= 0) in_credit[o] <= '{valid: 1'b1, vc: VC_W'(first)};
      end
    end
    for (int g = 0; g < 4; g++)
      if (lrn_out[g].valid) begin
        lseen[g].push_back(lrn_out[g]);
        lseen_t[g].push_back(cyc);
      end
    if (out_credit[P_L].valid) pe_credits++;
    if (ev.nonxy) n_nonxy++;
    if (ev.credit_stall) n_cstall++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic flit_t head_flit(int src, int dst, int vc, bit tail, nmask_t m);
    head_t h = '0;
    h.dest = node_t'(dst);
    h.src = node_t'(src);
    h.shared = m;
    h.payload = PAYLOAD_W'(dst * 1000 + src);
    return '{valid: 1'b1, head: 1'b1, tail: tail, vc: VC_W'(vc), data: FLIT_W'(h)};
  endfunction

  // drive one flit for one cycle; returns the cycle count of the writing edge
  task automatic send(input int p, input flit_t f, output longint t_wr);
    @(negedge clk);
    in_flit[p] = f;
    @(posedge clk);
    t_wr = cyc;
    #1 in_flit[p] = '0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    head_t  h;
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_flit[p] = '0; in_credit[p] = '0; hold[p] = 1'b0;
      for (int v = 0; v < NUM_VC; v++) owed[p][v] = 0;
    end
    for (int g = 0; g < 4; g++) lrn_in[g] = '0;
    pe_credits = 0; n_nonxy = 0; n_cstall = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. local -> node 5
    send(P_L, head_flit(4, 5, 1, 1'b1, '0), t0);
    repeat (6) @(posedge clk);
    check(seen[P_E].size() == 1, "packet for 5 left on E");
    if (seen[P_E].size() == 1) begin
      h = head_t'(seen[P_E][0].data);
      check(seen_t[P_E][0] == t0 + 3, $sformatf("on the E link %0d cycles after the write, expected 3 (out after edge t+2)", seen_t[P_E][0] - t0));
      check(seen[P_E][0].vc == 2'd0, "VC 0 (set 0)");
      check(h.dest == 6'd5 && h.shared == '0, "head intact, empty shared mask");
    end
    check(pe_credits == 1, "credit returned to the PE");

    // 2. local -> node 2: E on a tie, mask {5}
    send(P_L, head_flit(4, 2, 2, 1'b1, '0), t0);
    repeat (6) @(posedge clk);
    check(seen[P_E].size() == 2, "packet for 2 left on E");
    if (seen[P_E].size() == 2) begin
      h = head_t'(seen[P_E][1].data);
      check(h.dest == 6'd2 && h.shared == nmask_t'(1 << 5), $sformatf("shared mask %h, expected {5}", h.shared));
    end

    // 3. from W: head for node 8 with mask {2, 5} -> three learning packets
    send(P_W, head_flit(3, 8, 0, 1'b1, nmask_t'((1 << 2) | (1 << 5))), t0);
    repeat (8) @(posedge clk);
    check(lseen[P_W].size() == 3, $sformatf("%0d learning packets on W, expected 3", lseen[P_W].size()));
    if (lseen[P_W].size() == 3) begin
      int exp_d [3] = '{8, 2, 5};
      for (int i = 0; i < 3; i++) begin
        check(int'(lseen[P_W][i].dest) == exp_d[i], $sformatf("learning packet %0d dest %0d", i, lseen[P_W][i].dest));
        check(lseen[P_W][i].cost == qval_t'(16) && lseen[P_W][i].est == '0,
              $sformatf("learning packet %0d cost %0d est %0d", i, lseen[P_W][i].cost, lseen[P_W][i].est));
        check(lseen_t[P_W][i] == t0 + 2 + i, $sformatf("learning packet %0d at +%0d", i, lseen_t[P_W][i] - t0));
      end
    end

    // 4. learning on E raises Q(8,E); next packet for 8 goes S on set 1
    @(negedge clk);
    lrn_in[P_E] = '{valid: 1'b1, dest: 6'd8, cost: qval_t'(160), est: '0};
    @(posedge clk);
    #1 lrn_in[P_E] = '0;
    check(dut.u_qtable.tbl[8].qh == qval_t'((179 * 160) / 256), $sformatf("Q(8,E) = %0d", dut.u_qtable.tbl[8].qh));
    send(P_L, head_flit(4, 8, 3, 1'b1, '0), t0);
    repeat (6) @(posedge clk);
    check(seen[P_S].size() == 1, "packet for 8 left on S (non-XY)");
    if (seen[P_S].size() == 1) check(seen[P_S][0].vc >= 2'd2, "on a VC of set 1");
    check(n_nonxy > 0, "non-XY event");

    // 5. credit stall on W: 6-flit packet for node 3
    hold[P_W] = 1'b1;
    for (int i = 0; i < 6; i++) begin
      flit_t f;
      if (i == 0) f = head_flit(4, 3, 0, 1'b0, '0);
      else f = '{valid: 1'b1, head: 1'b0, tail: (i == 5), vc: 2'd0, data: FLIT_W'(i)};
      // the PE may only send with a credit: wait for the local VC to drain
      while (dut.cnt[P_L][0] >= 3'd4) @(posedge clk);
      send(P_L, f, t0);
    end
    repeat (10) @(posedge clk);
    check(seen[P_W].size() == 4, $sformatf("%0d flits left on W with credits held, expected 4", seen[P_W].size()));
    check(n_cstall > 0, "credit stall event");
    hold[P_W] = 1'b0;
    repeat (15) @(posedge clk);
    check(seen[P_W].size() == 6, $sformatf("%0d flits on W after the credits returned, expected 6", seen[P_W].size()));
    if (seen[P_W].size() == 6) begin
      h = head_t'(seen[P_W][0].data);
      check(seen[P_W][0].head && h.dest == 6'd3, "head first");
      for (int i = 1; i < 6; i++)
        check(seen[P_W][i].data == FLIT_W'(i) && seen[P_W][i].tail == (i == 5), $sformatf("body flit %0d in order", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
