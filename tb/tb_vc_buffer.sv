// tb_vc_buffer: self-checking test of the input VC buffer (4 VCs x 4 flits).
//
// Random writes (only into VCs with room, as credit flow control ensures)
// and random pops are applied; a queue per VC in the testbench predicts the
// front flit, the empty flags and the fill counts. Also fills one VC to its
// 4 flits and checks all four come out in order with the other VCs
// untouched.
module tb_vc_buffer;
  import qrasp_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  flit_t in_flit;
  logic  pop   [NUM_VC];
  flit_t front [NUM_VC];
  logic  empty [NUM_VC];
  logic [2:0] cnt [NUM_VC];

  vc_buffer #(.DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  flit_t model [NUM_VC][$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic compare();
    for (int v = 0; v < NUM_VC; v++) begin
      check(int'(cnt[v]) == model[v].size(), $sformatf("VC %0d count %0d expected %0d", v, cnt[v], model[v].size()));
      check(empty[v] == (model[v].size() == 0), $sformatf("VC %0d empty", v));
      if (model[v].size() > 0)
        check(front[v] == model[v][0], $sformatf("VC %0d front", v));
    end
  endtask

  function automatic flit_t rnd_flit(int v);
    flit_t f;
    f.valid = 1'b1;
    f.head  = 1'($urandom);
    f.tail  = 1'($urandom);
    f.vc    = VC_W'(v);
    f.data  = {$urandom, $urandom, $urandom, $urandom};
    return f;
  endfunction

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_flit = '0;
    for (int v = 0; v < NUM_VC; v++) pop[v] = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // fill VC 2 with 4 flits, then read them back
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      in_flit = rnd_flit(2);
      model[2].push_back(in_flit);
      @(posedge clk);
      #1 in_flit = '0;
    end
    compare();
    check(int'(cnt[2]) == 4, "VC 2 holds 4 flits");
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      pop[2] = 1'b1;
      check(front[2] == model[2][0], $sformatf("VC 2 flit %0d in order", i));
      void'(model[2].pop_front());
      @(posedge clk);
      #1 pop[2] = 1'b0;
    end
    compare();
    // random
    for (int t = 0; t < 4000; t++) begin
      int wv;
      @(negedge clk);
      in_flit = '0;
      wv = $urandom_range(NUM_VC-1);
      for (int v = 0; v < NUM_VC; v++) pop[v] = 1'($urandom_range(2) == 0) && model[v].size() > 0;
      if ($urandom_range(1) && model[wv].size() < 4) in_flit = rnd_flit(wv);
      @(posedge clk);
      for (int v = 0; v < NUM_VC; v++) if (pop[v]) void'(model[v].pop_front());
      if (in_flit.valid) model[in_flit.vc].push_back(in_flit);
      #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
