// q_update: one Q-learning update of a Q-value (Eq. 2 of Q-routing, with the
// cost of the downstream router in place of the local queueing time):
//
//   Q_new = (1 - alpha) * Q_old + alpha * (cost + gamma * est)
//
// computed as Q_old + alpha * (target - Q_old) with target = cost + gamma*est.
// All values are unsigned fixed point with 6 integer and 4 fractional bits;
// alpha and gamma are fractions with 8 fractional bits. Products are
// truncated toward minus infinity and the target and result saturate at the
// largest Q-value. Purely combinational.
//
// Follows the paper: the update equation, alpha = 0.70, gamma = 0.90 and the
// 10-bit Q-value format. Own choices: 8-bit constants (179/256 = 0.699,
// 230/256 = 0.898), truncation and saturation.
module q_update
  import qrasp_pkg::*;
#(
  parameter logic [7:0] ALPHA = 8'd179,   // learning rate 0.70
  parameter logic [7:0] GAMMA = 8'd230    // discount factor 0.90
) (
  input  qval_t q_old,
  input  qval_t cost,
  input  qval_t est,
  output qval_t q_new
);

  localparam int unsigned QMAX = (1 << QW) - 1;

  logic [QW+8-1:0]     disc;      // gamma * est, 8 extra fractional bits
  logic [QW:0]         target;    // cost + gamma*est, one guard bit
  qval_t               target_s;
  logic signed [QW+1:0] diff;
  logic signed [QW+10:0] step;    // alpha * diff, 8 extra fractional bits
  logic signed [QW+2:0] sum;

  always_comb begin
    disc     = est * GAMMA;
    target   = {1'b0, cost} + {1'b0, disc[QW+8-1:8]};
    target_s = (target > (QW+1)'(QMAX)) ? qval_t'(QMAX) : target[QW-1:0];
    diff     = $signed({2'b00, target_s}) - $signed({2'b00, q_old});
    step     = diff * $signed({1'b0, ALPHA});
    sum      = $signed({3'b000, q_old}) + (QW+3)'(step >>> 8);
    if (sum < 0)                         q_new = '0;
    else if (sum > (QW+3)'(QMAX))        q_new = qval_t'(QMAX);
    else                                 q_new = sum[QW-1:0];
  end

endmodule
