// cost_unit: Q-RASP path- and region-contention cost of one routing action,
// computed in the downstream router y as soon as a head flit has entered it.
//
//   r_i = number of occupied VCs at the input port the packet arrived on
//   r_o = number of reserved VCs at the output port y selected for it
//   q_p = r_i + r_o                      (path contention, 4-bit adder)
//   q_r = sum of r_o over the routing options O of the packet at y
//   q_y = q_p + mu * q_r                 (4x4 multiplier, mu a 4-bit fraction)
//
// Occupancy comes from comparators on the per-VC fill counts (a VC that is
// being written this cycle counts as occupied); reservation comes from the
// output VC reservation table. q_y is produced in the Q-value format
// (6 integer, 4 fractional bits). Purely combinational.
//
// Follows the paper: the cost terms, the 4-bit adder and the 4x4 multiplier.
// Own choices: O is the set of minimal output ports for the packet at y (one
// or two; the local port when y is the destination); q_r follows the
// equation (sum over all options) rather than the prose variant "q_p plus
// the other outputs"; mu defaults to 2/16 = 0.125, the nearest 4-bit value
// to the paper's 0.1.
module cost_unit
  import qrasp_pkg::*;
#(
  parameter int unsigned CNT_W = 3,          // width of a VC fill count
  parameter logic [3:0]  MU    = 4'd2        // region weight, 4 fractional bits
) (
  input  logic [CNT_W-1:0]     in_cnt [NUM_VC],            // fill count of each VC at the arrival port
  input  logic                 arr_valid,                  // a flit is being written now ...
  input  logic [VC_W-1:0]      arr_vc,                     // ... into this VC
  input  logic [NUM_VC-1:0]    out_resv [NUM_PORTS],       // VC reservation table of router y
  input  port_e                sel_out,                    // output port chosen at y
  input  logic [NUM_PORTS-1:0] opts,                       // routing options O at y
  output logic [2:0]           r_i,
  output logic [2:0]           r_o,
  output logic [3:0]           q_p,
  output logic [3:0]           q_r,
  output qval_t                q_y
);

  logic [2:0] resv_cnt [NUM_PORTS];
  logic [7:0] region_prod;
  logic [4:0] q_r_wide;

  always_comb begin
    // comparators on the input VCs
    r_i = '0;
    for (int v = 0; v < NUM_VC; v++)
      if (in_cnt[v] != '0 || (arr_valid && arr_vc == VC_W'(v))) r_i = r_i + 3'd1;

    // comparators on the reservation table, one count per output port
    for (int p = 0; p < NUM_PORTS; p++) begin
      resv_cnt[p] = '0;
      for (int v = 0; v < NUM_VC; v++)
        if (out_resv[p][v]) resv_cnt[p] = resv_cnt[p] + 3'd1;
    end
    r_o = resv_cnt[sel_out];

    q_p = 4'(r_i) + 4'(r_o);

    q_r_wide = '0;
    for (int p = 0; p < NUM_PORTS; p++)
      if (opts[p]) q_r_wide = q_r_wide + 5'(resv_cnt[p]);
    q_r = (q_r_wide > 5'd15) ? 4'd15 : q_r_wide[3:0];

    region_prod = q_r * MU;                          // 4x4 -> 8 bits, 4 fractional
    q_y = {2'b00, q_p, 4'b0000} + QW'(region_prod);
  end

endmodule
