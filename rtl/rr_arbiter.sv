// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (or zero when nothing is requested) and combinational:
// the first requester at or after the priority pointer wins. When advance is
// high on a clock edge and a grant was given, the pointer moves just past the
// winner, so every requester is served within N grants. Helper of the router
// allocators; the arbitration policy is this design's own choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx,
  output logic                 any
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % N;
      if (!any && req[i]) begin
        any       = 1'b1;
        grant[i]  = 1'b1;
        grant_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ptr <= '0;
    else if (advance && any) ptr <= (grant_idx == IW'(N-1)) ? '0 : grant_idx + 1'b1;
  end

endmodule
