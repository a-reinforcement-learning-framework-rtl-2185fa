// vc_buffer: the input buffer of one router port, NUM_VC virtual channels
// with a DEPTH-flit FIFO each.
//
// A valid flit on in_flit is written into the FIFO of its VC on the clock
// edge. Each VC's oldest flit is shown on front[v] with empty[v] and its fill
// count cnt[v]; pop[v] removes it on the clock edge. Credit-based flow
// control guarantees that a full VC is never written, which an assertion
// checks. Read and write of the same VC in one cycle are allowed.
//
// Follows the paper: 4 VCs per port with 4 flit buffers each and 128-bit
// flits. Own choices: FIFO organisation (circular buffer per VC).
module vc_buffer
  import qrasp_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  flit_t       in_flit,
  input  logic        pop   [NUM_VC],
  output flit_t       front [NUM_VC],
  output logic        empty [NUM_VC],
  output logic [$clog2(DEPTH+1)-1:0] cnt [NUM_VC]
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    flit_t         mem [DEPTH];
    logic [AW-1:0] rd_ptr, wr_ptr;
    logic [CW-1:0] n;
    logic          wr, rd;

    assign wr       = in_flit.valid && in_flit.vc == VC_W'(v);
    assign rd       = pop[v] && n != '0;
    assign front[v] = (n != '0) ? mem[rd_ptr] : '0;
    assign empty[v] = (n == '0);
    assign cnt[v]   = n;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr <= '0;
        wr_ptr <= '0;
        n      <= '0;
      end else begin
        if (wr) begin
          mem[wr_ptr] <= in_flit;
          wr_ptr      <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
        end
        if (rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
        n <= n + CW'(wr) - CW'(rd);
      end
    end

    // flow control: a full VC is never written
    assert property (@(posedge clk) disable iff (!rst_n) wr |-> (n < CW'(DEPTH) || rd))
      else $error("vc_buffer: write to full VC %0d", v);
  end

endmodule
