// tb_qrasp_noc_4x4: end-to-end test of the Q-RASP mesh reduced to 4x4 routers (all
// other parameters at their defaults), a quick version of tb_qrasp_noc.
//
// A behavioural PE (noc_pe) sits on every local port. The test runs:
//  1. zero-load latency: single-flit packets over 6, 1 and 6 hops on an idle
//     network must be ejected exactly 3*hops + 4 cycles after the source put
//     them on its injection link (3 cycles per router, one to enter);
//  2. synthetic traffic with packets of 1..8 flits (longer than a VC buffer,
//     so flits wait for credits): transpose, bit-reversal,
//     shuffle, butterfly and uniform random, back to back, at rates that load
//     the network, then a drain;
//  3. checks: every packet delivered to the right node, complete and in order
//     (checked by the sinks), all packets sent were received, and each
//     mechanism of the design happened at least once: Q-value updates from
//     learning packets, shared-path learning packets, learning-queue
//     overflow, adaptive (non-XY) routing, credit stalls, VC-allocation
//     stalls, and allocation in both VC sets.
module tb_qrasp_noc_4x4;
  import qrasp_pkg::*;

  localparam int MX = 4;
  localparam int MY = 4;
  localparam int N  = MX * MY;
  localparam int PHASE_CYCLES = 1200;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  flit_t      inj_flit   [N];
  credit_t    inj_credit [N];
  flit_t      ej_flit    [N];
  credit_t    ej_credit  [N];
  router_ev_t ev         [N];

  qrasp_noc #(.MESH_X(MX), .MESH_Y(MY)) dut (
    .clk        (clk),
    .rst_n      (rst_n),
    .inj_flit   (inj_flit),
    .inj_credit (inj_credit),
    .ej_flit    (ej_flit),
    .ej_credit  (ej_credit),
    .ev         (ev)
  );

  always #5 clk = ~clk;

  logic   gen_en;
  int     pattern, rate;
  int     fixed_dest [N];
  logic   force_one  [N];
  int     sent [N], recv [N], errors [N], last_lat [N], queued [N];
  longint lat_sum [N];

  for (genvar i = 0; i < N; i++) begin : g_pe
    noc_pe #(.MESH_X(MX), .MESH_Y(MY), .MAX_LEN(8)) u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .ID         (i),
      .gen_en     (gen_en),
      .pattern    (pattern),
      .rate       (rate),
      .fixed_dest (fixed_dest[i]),
      .force_one  (force_one[i]),
      .inj_flit   (inj_flit[i]),
      .inj_credit (inj_credit[i]),
      .ej_flit    (ej_flit[i]),
      .ej_credit  (ej_credit[i]),
      .sent       (sent[i]),
      .recv       (recv[i]),
      .errors     (errors[i]),
      .lat_sum    (lat_sum[i]),
      .last_lat   (last_lat[i]),
      .queued     (queued[i])
    );
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  // mechanism counters
  longint n_lrn, n_shared, n_drop, n_nonxy, n_cstall, n_vstall, n_set0, n_set1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n)
      for (int i = 0; i < N; i++) begin
        n_lrn    += longint'(ev[i].lrn_rx);
        n_shared += longint'(ev[i].shared_tx);
        n_drop   += longint'(ev[i].lq_drop);
        n_nonxy  += longint'(ev[i].nonxy);
        n_cstall += longint'(ev[i].credit_stall);
        n_vstall += longint'(ev[i].va_stall);
        n_set0   += longint'(ev[i].vc_set0);
        n_set1   += longint'(ev[i].vc_set1);
      end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int hops(int a, int b);
    int dx, dy;
    dx = (a % MX) - (b % MX);
    dy = (a / MX) - (b / MX);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  function automatic int total(input int arr [N]);
    int s = 0;
    foreach (arr[i]) s += arr[i];
    return s;
  endfunction

  task automatic zero_load(input int s, input int d);
    int n_before;
    #1 n_before = recv[d];
    fixed_dest[s] = d;
    force_one[s]  = 1'b1;
    @(posedge clk);
    #1 force_one[s] = 1'b0;
    repeat (3 * hops(s, d) + 20) @(posedge clk);
    check(recv[d] == n_before + 1, $sformatf("zero-load packet %0d->%0d delivered (%0d -> %0d)", s, d, n_before, recv[d]));
    check(last_lat[d] == 3 * hops(s, d) + 4,
          $sformatf("zero-load latency %0d->%0d: %0d cycles, expected %0d",
                    s, d, last_lat[d], 3 * hops(s, d) + 4));
  endtask

  // watchdog
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_lrn = 0; n_shared = 0; n_drop = 0; n_nonxy = 0;
    n_cstall = 0; n_vstall = 0; n_set0 = 0; n_set1 = 0;
    gen_en = 1'b0; pattern = 0; rate = 0;
    for (int i = 0; i < N; i++) begin
      fixed_dest[i] = 0;
      force_one[i]  = 1'b0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // 1. zero-load latency
    zero_load(0, 15);
    zero_load(5, 6);
    zero_load(3, 12);

    // 2. synthetic traffic
    begin
      int pats  [5] = '{1, 2, 4, 3, 0};
      int rates [5] = '{45, 45, 40, 45, 40};
      for (int k = 0; k < 5; k++) begin
        #1 pattern = pats[k];
        rate   = rates[k];
        gen_en = 1'b1;
        repeat (PHASE_CYCLES) @(posedge clk);
        $display("phase %0d (pattern %0d) at cycle %0d: sent %0d received %0d",
                 k, pats[k], cyc, total(sent), total(recv));
      end
      #1 gen_en = 1'b0;
    end

    // drain
    for (int t = 0; t < 20000; t++) begin
      @(posedge clk);
      if (total(recv) == total(sent) && total(queued) == 0) t = 20000;
    end
    repeat (10) @(posedge clk);

    // 3. checks
    check(total(errors) == 0, $sformatf("%0d flits wrong at the sinks", total(errors)));
    check(total(sent) > 1000, $sformatf("traffic was injected (%0d packets)", total(sent)));
    check(total(recv) == total(sent),
          $sformatf("all packets delivered: sent %0d received %0d", total(sent), total(recv)));
    begin
      longint ls = 0;
      foreach (lat_sum[i]) ls += lat_sum[i];
      $display("average packet latency %0.1f cycles", real'(ls) / real'(total(recv)));
    end
    $display("events: lrn %0d shared %0d drop %0d nonxy %0d credit_stall %0d va_stall %0d set0 %0d set1 %0d",
             n_lrn, n_shared, n_drop, n_nonxy, n_cstall, n_vstall, n_set0, n_set1);
    check(n_lrn    > 0, "Q-value updates from learning packets happened");
    check(n_shared > 0, "shared-path learning packets happened");
    check(n_drop   > 0, "learning-queue overflow happened");
    check(n_nonxy  > 0, "adaptive non-XY routing happened");
    check(n_cstall > 0, "credit stalls happened");
    check(n_vstall > 0, "VC-allocation stalls happened");
    check(n_set0   > 0, "VC set 0 allocations happened");
    check(n_set1   > 0, "VC set 1 allocations happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
