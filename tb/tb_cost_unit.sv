// tb_cost_unit: self-checking test of the Q-RASP cost unit.
//
// Drives random VC fill counts, an optional arriving flit, a random
// reservation table, a selected output and a set of one or two routing
// options, and compares r_i, r_o, q_p, q_r and q_y with a reference that
// counts with integers and computes q_y = q_p + mu*q_r in real arithmetic
// (exact here, as mu is k/16). Also checks the paper's worked ranges: with
// 4 VCs, q_p never exceeds 8 and fits the 4-bit adder.
module tb_cost_unit;
  import qrasp_pkg::*;

  localparam logic [3:0] MU = 4'd2;

  logic [2:0]           in_cnt [NUM_VC];
  logic                 arr_valid;
  logic [VC_W-1:0]      arr_vc;
  logic [NUM_VC-1:0]    out_resv [NUM_PORTS];
  port_e                sel_out;
  logic [NUM_PORTS-1:0] opts;
  logic [2:0]           r_i, r_o;
  logic [3:0]           q_p, q_r;
  qval_t                q_y;

  cost_unit #(.CNT_W(3), .MU(MU)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int ei, eo, er, ro_cnt [NUM_PORTS];
      real ey;
      for (int v = 0; v < NUM_VC; v++) in_cnt[v] = 3'($urandom_range(4));
      if (t % 3 == 0) for (int v = 0; v < NUM_VC; v++) in_cnt[v] = 3'd0;
      arr_valid = 1'($urandom_range(1));
      arr_vc    = VC_W'($urandom_range(3));
      for (int p = 0; p < NUM_PORTS; p++) out_resv[p] = NUM_VC'($urandom);
      sel_out = port_e'($urandom_range(4));
      opts    = '0;
      opts[sel_out] = 1'b1;
      if (sel_out != P_L && $urandom_range(1)) begin
        // a second minimal direction, perpendicular to the chosen one
        if (sel_out == P_N || sel_out == P_S) opts[$urandom_range(1) ? P_E : P_W] = 1'b1;
        else                                  opts[$urandom_range(1) ? P_N : P_S] = 1'b1;
      end
      #1;
      ei = 0;
      for (int v = 0; v < NUM_VC; v++)
        if (in_cnt[v] > 0 || (arr_valid && int'(arr_vc) == v)) ei++;
      for (int p = 0; p < NUM_PORTS; p++) ro_cnt[p] = $countones(out_resv[p]);
      eo = ro_cnt[sel_out];
      er = 0;
      for (int p = 0; p < NUM_PORTS; p++) if (opts[p]) er += ro_cnt[p];
      ey = real'(ei + eo) + (real'(MU) / 16.0) * real'(er);
      check(int'(r_i) == ei, $sformatf("r_i %0d expected %0d", r_i, ei));
      check(int'(r_o) == eo, $sformatf("r_o %0d expected %0d", r_o, eo));
      check(int'(q_p) == ei + eo && ei + eo <= 8, $sformatf("q_p %0d expected %0d", q_p, ei + eo));
      check(int'(q_r) == er, $sformatf("q_r %0d expected %0d", q_r, er));
      check(real'(q_y) / 16.0 == ey, $sformatf("q_y %0d/16 expected %f", q_y, ey));
    end
    // a hand-worked case: 2 occupied input VCs, 3 reserved at the chosen
    // output E, 1 reserved at the other option S: q_y = 5 + 0.125*4 = 5.5
    for (int v = 0; v < NUM_VC; v++) in_cnt[v] = (v < 2) ? 3'd1 : 3'd0;
    arr_valid = 1'b0;
    for (int p = 0; p < NUM_PORTS; p++) out_resv[p] = '0;
    out_resv[P_E] = 4'b0111;
    out_resv[P_S] = 4'b1000;
    out_resv[P_N] = 4'b1111;   // not an option: ignored
    sel_out = P_E;
    opts    = 5'b00110;        // E and S
    #1;
    check(q_y == qval_t'(88), $sformatf("worked case q_y %0d expected 88 (5.5)", q_y));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
