// tb_learn_queue: self-checking test of the learning-packet queue.
//
// A reference model in the testbench (its own queue of expected packets)
// follows the rule: on an arrival, the packet for the arriving destination
// and then one per destination of the shared mask, lowest id first, are
// written as far as the 4 entries allow (the entry sent in the same cycle
// counts as free); the rest are dropped. Every cycle the oldest entry leaves
// on the registered output. The test checks each sent packet (destination,
// cost, estimate), the drop and shared counts, the occupancy, that an
// arrival with a 6-destination mask fills the queue and drops 3, and that a
// lone arrival on an empty queue appears on the output exactly one cycle
// later.
module tb_learn_queue;
  import qrasp_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   gen_valid;
  node_t  gen_dest;
  qval_t  gen_cost;
  nmask_t gen_mask;
  qval_t  est_all [MAX_NODES];
  lpkt_t  lrn_out;
  logic [2:0] count;
  logic [NODE_W:0] drop_cnt;
  logic [2:0] shared_cnt;

  learn_queue #(.DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  lpkt_t model [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle: drive inputs, compute the expectation, clock, compare
  task automatic step(input bit v, input int d, input int c, input nmask_t m);
    lpkt_t exp_out, cands [$];
    int free, edrop, eshared;
    @(negedge clk);
    gen_valid = v; gen_dest = node_t'(d); gen_cost = qval_t'(c); gen_mask = m;
    exp_out = (model.size() > 0) ? model[0] : '0;
    if (model.size() > 0) void'(model.pop_front());
    free = 4 - model.size();
    cands = {};
    if (v) begin
      cands.push_back('{valid: 1'b1, dest: node_t'(d), cost: qval_t'(c), est: est_all[d]});
      for (int i = 0; i < MAX_NODES; i++)
        if (m[i]) cands.push_back('{valid: 1'b1, dest: node_t'(i), cost: qval_t'(c), est: est_all[i]});
    end
    edrop = 0; eshared = 0;
    foreach (cands[i]) begin
      if (free > 0) begin
        model.push_back(cands[i]);
        free--;
        if (i > 0) eshared++;
      end else edrop++;
    end
    #1;
    check(int'(drop_cnt) == edrop, $sformatf("drop %0d expected %0d", drop_cnt, edrop));
    check(int'(shared_cnt) == eshared, $sformatf("shared %0d expected %0d", shared_cnt, eshared));
    @(posedge clk);
    #1;
    check(lrn_out == exp_out, $sformatf("out dest %0d cost %0d est %0d, expected %0d/%0d/%0d valid %0d",
          lrn_out.dest, lrn_out.cost, lrn_out.est, exp_out.dest, exp_out.cost, exp_out.est, exp_out.valid));
    check(int'(count) == model.size(), $sformatf("count %0d expected %0d", count, model.size()));
  endtask

  initial begin
    for (int i = 0; i < MAX_NODES; i++) est_all[i] = qval_t'(i * 7 + 3);
    gen_valid = 1'b0; gen_dest = '0; gen_cost = '0; gen_mask = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // lone arrival: out one cycle after the edge that wrote it
    step(1, 14, 42, '0);
    step(0, 0, 0, '0);
    // overflow: 1 + 6 destinations into 4 entries
    step(1, 14, 50, nmask_t'((1 << 11) | (1 << 15) | (1 << 20) | (1 << 33) | (1 << 40) | (1 << 63)));
    check(model.size() == 4, "queue full after a 6-destination arrival");
    repeat (5) step(0, 0, 0, '0);
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      nmask_t m = '0;
      int k = $urandom_range(3);
      for (int j = 0; j < k; j++) m[$urandom_range(63)] = 1'b1;
      step($urandom_range(2) == 0, $urandom_range(63), $urandom_range(200), m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
