// tb_q_update: self-checking test of the Q-learning update.
//
// The reference evaluates (1 - alpha)*Q + alpha*(cost + gamma*est) in real
// arithmetic with the paper's alpha = 0.70 and gamma = 0.90; the RTL uses
// 8-bit approximations of both and a 10-bit fixed-point result, so a result
// within 0.3 of the reference (plus saturation at 63.9375) is accepted.
// Exact integer cases check the rounding of the fixed-point datapath, and a
// repeated update with constant cost and estimate must converge to the fixed
// point alpha*(c+g*e)/alpha = c + g*e.
module tb_q_update;
  import qrasp_pkg::*;

  qval_t q_old, cost, est, q_new;

  q_update dut (.*);

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
    for (int t = 0; t < 3000; t++) begin
      real r, got;
      q_old = qval_t'($urandom);
      cost  = qval_t'($urandom_range(160));   // costs stay below 10
      est   = qval_t'($urandom_range(800));   // keeps the target below 64
      #1;
      r = 0.3 * (real'(q_old) / 16.0) + 0.7 * (real'(cost) / 16.0 + 0.9 * real'(est) / 16.0);
      if (r > 63.9375) r = 63.9375;
      got = real'(q_new) / 16.0;
      check(got - r < 0.3 && r - got < 0.3,
            $sformatf("Q %0d cost %0d est %0d: got %f expected %f", q_old, cost, est, got, r));
    end
    // exact fixed-point cases: Q + floor(179*(T - Q)/256), T = cost + floor(230*est/256)
    q_old = 10'd0;   cost = 10'd128; est = 10'd0;   #1;   // 8.0 from 0
    check(q_new == 10'd89, $sformatf("0 -> 8.0: %0d expected 89", q_new));
    q_old = 10'd160; cost = 10'd0;   est = 10'd0;   #1;   // 10.0 toward 0
    check(q_new == 10'd48, $sformatf("10.0 -> 0: %0d expected 48", q_new));
    q_old = 10'd32;  cost = 10'd16;  est = 10'd256; #1;   // T = 16 + 230 = 246
    check(q_new == 10'd181, $sformatf("worked case: %0d expected 181", q_new));
    q_old = 10'd1000; cost = 10'd1000; est = 10'd1000; #1; // target saturates at 1023
    check(q_new == 10'd1016, $sformatf("saturation: %0d expected 1000 + floor(179*23/256) = 1016", q_new));
    // convergence toward c + g*e
    q_old = '0; cost = 10'd48; est = 10'd80;
    for (int i = 0; i < 30; i++) begin
      #1 q_old = q_new;
    end
    #1;
    check(q_new >= 10'd117 && q_new <= 10'd119,
          $sformatf("converged to %0d, expected about 48 + 71 = 119", q_new));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
