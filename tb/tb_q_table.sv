// tb_q_table: self-checking test of the Q-RASP routing table.
//
// The table under test is router 06 of a 4x4 mesh, the router of the
// paper's shared-path example (nodes numbered row*4+col, node 06 at row 1,
// column 2). The test checks:
//  * the route codes against the printed route-number table (N->E = 0 ...
//    W->S = 11);
//  * the example: destinations 11, 14 and 15 routed N->S (code 1), 12 routed
//    W->S; a packet to 14 leaving N->S must carry the mask {11, 15};
//  * random learning-packet updates on all four ports against a shadow model
//    that applies Q + floor(179*(T - Q)/256), T = cost + floor(230*est/256)
//    with its own integer arithmetic, then route selection (minimum rule,
//    ties horizontal), option sets, non-XY flag and the min estimates.
module tb_q_table;
  import qrasp_pkg::*;

  localparam int MX = 4, MY = 4, ME_X = 2, ME_Y = 1, SELF = 6, N = 16;

  logic                 clk = 1'b0, rst_n = 1'b0;
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
  lpkt_t                up       [4];
  node_t                obs_dest;
  qrow_t                obs_row;

  coord_t my_x, my_y;
  assign my_x = coord_t'(ME_X);
  assign my_y = coord_t'(ME_Y);

  q_table #(.MESH_X(MX), .MESH_Y(MY)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int sh_qh [N], sh_qv [N];   // shadow Q-values

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int upd(int q, int c, int e);
    int t, d, s;
    t = c + (e * 230) / 256;
    if (t > 1023) t = 1023;
    d = (t - q) * 179;
    s = (d >= 0) ? d / 256 : -((-d + 255) / 256);   // floor division
    q = q + s;
    return (q < 0) ? 0 : (q > 1023 ? 1023 : q);
  endfunction

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int printed [4][4];
    printed = '{'{-1, 0, 1, 2}, '{3, -1, 4, 5}, '{6, 7, -1, 8}, '{9, 10, 11, -1}};
    for (int i = 0; i < 4; i++)
      for (int o = 0; o < 4; o++)
        if (i != o)
          check(int'(route_code(port_e'(i), port_e'(o))) == printed[i][o],
                $sformatf("route code %0d->%0d", i, o));

    for (int p = 0; p < NUM_PORTS; p++) begin
      rs_dest[p] = '0; rw_en[p] = 1'b0; rw_dest[p] = '0; rw_code[p] = '0;
      mk_dest[p] = '0; mk_code[p] = '0;
    end
    for (int g = 0; g < 4; g++) up[g] = '0;
    obs_dest = '0;
    for (int d = 0; d < N; d++) begin sh_qh[d] = 0; sh_qv[d] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // shared-path example: 11, 14, 15 routed N->S, 12 routed W->S
    rw_en[0] = 1'b1; rw_dest[0] = 6'd11; rw_code[0] = route_code(P_N, P_S);
    rw_en[1] = 1'b1; rw_dest[1] = 6'd15; rw_code[1] = route_code(P_N, P_S);
    rw_en[2] = 1'b1; rw_dest[2] = 6'd12; rw_code[2] = route_code(P_W, P_S);
    @(posedge clk);
    #1 rw_dest[0] = 6'd14;
    rw_en[1] = 1'b0; rw_en[2] = 1'b0;
    @(posedge clk);
    #1 rw_en[0] = 1'b0;
    mk_dest[P_S] = 6'd14; mk_code[P_S] = 4'd1;
    mk_dest[P_E] = 6'd11; mk_code[P_E] = route_code(P_W, P_S);
    #1;
    check(mk_mask[P_S] == nmask_t'((1 << 11) | (1 << 15)),
          $sformatf("shared mask for 14 via N->S = %h, expected {11,15}", mk_mask[P_S]));
    check(mk_mask[P_E] == nmask_t'(1 << 12), $sformatf("mask for W->S = %h", mk_mask[P_E]));
    obs_dest = 6'd14;
    #1 check(obs_row.rvalid && obs_row.route == 4'd1, "Route column of 14 holds 1");

    // random updates and route selection
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int g = 0; g < 4; g++) begin
        up[g] = '0;
        if ($urandom_range(1)) begin
          int d, dx, dy;
          d  = int'($urandom_range(N-1));
          dx = d % MX; dy = d / MX;
          // only destinations for which direction g is minimal
          if ((g == P_E && dx > ME_X) || (g == P_W && dx < ME_X) ||
              (g == P_S && dy > ME_Y) || (g == P_N && dy < ME_Y)) begin
            up[g].valid = 1'b1;
            up[g].dest  = node_t'(d);
            up[g].cost  = qval_t'($urandom_range(150));
            up[g].est   = qval_t'($urandom_range(600));
          end
        end
      end
      @(posedge clk);
      for (int g = 0; g < 4; g++)
        if (up[g].valid) begin
          if (g == P_E || g == P_W) sh_qh[up[g].dest] = upd(sh_qh[up[g].dest], up[g].cost, up[g].est);
          else                      sh_qv[up[g].dest] = upd(sh_qv[up[g].dest], up[g].cost, up[g].est);
        end
      #1;
      for (int g = 0; g < 4; g++) up[g] = '0;
      for (int p = 0; p < NUM_PORTS; p++) rs_dest[p] = node_t'($urandom_range(N-1));
      #1;
      for (int p = 0; p < NUM_PORTS; p++) begin
        int d, dx, dy, e;
        port_e exp_o;
        logic [NUM_PORTS-1:0] exp_opts;
        logic h, v, nx;
        d = int'(rs_dest[p]); dx = d % MX; dy = d / MX;
        exp_opts = '0;
        if (dx > ME_X) exp_opts[P_E] = 1'b1;
        if (dx < ME_X) exp_opts[P_W] = 1'b1;
        if (dy > ME_Y) exp_opts[P_S] = 1'b1;
        if (dy < ME_Y) exp_opts[P_N] = 1'b1;
        h = (dx != ME_X); v = (dy != ME_Y);
        nx = 1'b0;
        if (!h && !v) begin exp_opts[P_L] = 1'b1; exp_o = P_L; e = 0; end
        else if (h && v) begin
          if (sh_qv[d] < sh_qh[d]) begin
            exp_o = (dy > ME_Y) ? P_S : P_N; e = sh_qv[d]; nx = 1'b1;
          end else begin
            exp_o = (dx > ME_X) ? P_E : P_W; e = sh_qh[d];
          end
        end else if (h) begin exp_o = (dx > ME_X) ? P_E : P_W; e = sh_qh[d]; end
        else            begin exp_o = (dy > ME_Y) ? P_S : P_N; e = sh_qv[d]; end
        check(rs_out[p] == exp_o, $sformatf("dest %0d: out %0d expected %0d", d, rs_out[p], exp_o));
        check(rs_opts[p] == exp_opts, $sformatf("dest %0d: opts", d));
        check(rs_nonxy[p] == nx, $sformatf("dest %0d: nonxy", d));
        check(int'(est_all[d]) == e, $sformatf("dest %0d: est %0d expected %0d", d, est_all[d], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
