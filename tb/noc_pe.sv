// noc_pe: behavioural processing element for simulating the Q-RASP mesh.
//
// Source side: each cycle, with probability rate/1000 (while gen_en), a
// packet of 1..MAX_LEN flits to the node given by the traffic pattern is put
// into an unbounded injection queue. Packets are sent in order, one flit per
// cycle, on a VC whose credits are all back (the rule of the router), and
// only with a credit. The head flit's payload holds the injection cycle,
// length and sequence number; body flits hold {src, dest, seq, flit index}.
// Sink side: every ejected flit is checked (right node, flits of a packet in
// order and complete, payload as sent) and its credit returned one cycle
// later. Counters report packets sent and received, errors and latency
// (injection of the head into the network to ejection of the tail).
//
// Patterns: 0 uniform random, 1 transpose, 2 bit-reversal, 3 butterfly,
// 4 shuffle, 5 fixed destination (fixed_dest). Node ids are row*MESH_X+col.
module noc_pe
  import qrasp_pkg::*;
#(
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned DEPTH   = 4,
  parameter int unsigned MAX_LEN = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  int      ID,            // node id of this PE
  input  logic    gen_en,
  input  int      pattern,
  input  int      rate,          // packets per 1000 cycles
  input  int      fixed_dest,
  input  logic    force_one,     // queue one packet to fixed_dest now
  output flit_t   inj_flit,
  input  credit_t inj_credit,
  input  flit_t   ej_flit,
  output credit_t ej_credit,
  output int      sent,
  output int      recv,
  output int      errors,
  output longint  lat_sum,
  output int      last_lat,
  output int      queued
);

  localparam int N    = MESH_X * MESH_Y;
  localparam int BITS = $clog2(N);

  typedef struct {
    int dest;
    int len;
    int seq;
  } pkt_t;

  pkt_t   q[$];
  int     seq_ctr;
  int     cred [NUM_VC];
  logic   vbusy [NUM_VC];
  // packet being sent
  logic   active;
  pkt_t   cur;
  int     cur_idx;
  int     cur_vc;
  longint cycle;
  // reassembly per VC at the sink
  int     rx_src [NUM_VC], rx_dest [NUM_VC], rx_seq [NUM_VC], rx_len [NUM_VC], rx_idx [NUM_VC];
  logic   rx_act [NUM_VC];
  longint rx_t0 [NUM_VC];

  function automatic int pattern_dest(int p);
    int r, c, d;
    r = ID / MESH_X;
    c = ID % MESH_X;
    case (p)
      0: begin
        d = int'($urandom_range(N-1));
        if (d == int'(ID)) d = (d + 1) % N;
      end
      1: d = (c % MESH_Y) * MESH_X + (r % MESH_X);
      2: begin
        d = 0;
        for (int b = 0; b < BITS; b++) if (ID[b]) d |= 1 << (BITS-1-b);
      end
      3: begin
        d = int'(ID);
        d[0] = ID[BITS-1];
        d[BITS-1] = ID[0];
      end
      4: d = ((int'(ID) << 1) | (int'(ID) >> (BITS-1))) & (N-1);
      default: d = fixed_dest;
    endcase
    return d;
  endfunction

  function automatic logic [FLIT_W-1:0] body_word(int src, int dst, int sq, int idx);
    return {32'hB0D1_0000 | 32'(idx), 32'(src), 32'(dst), 32'(sq)};
  endfunction

  assign queued = q.size();

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q.delete();
      seq_ctr <= 0;
      for (int v = 0; v < NUM_VC; v++) begin
        cred[v]   <= DEPTH;
        vbusy[v]  <= 1'b0;
        rx_act[v] <= 1'b0;
      end
      active    <= 1'b0;
      inj_flit  <= '0;
      ej_credit <= '0;
      sent      <= 0;
      recv      <= 0;
      errors    <= 0;
      lat_sum   <= 0;
      last_lat  <= 0;
      cycle     <= 0;
      cur_idx   <= 0;
      cur_vc    <= 0;
    end else begin
      automatic int   cr [NUM_VC];
      automatic flit_t f = '0;
      cycle <= cycle + 1;
      for (int v = 0; v < NUM_VC; v++) cr[v] = cred[v];
      if (inj_credit.valid) cr[inj_credit.vc] = cr[inj_credit.vc] + 1;

      // generation
      if (gen_en && $urandom_range(999) < rate) begin
        automatic int d = pattern_dest(pattern);
        if (d != int'(ID)) begin
          q.push_back('{dest: d, len: int'($urandom_range(MAX_LEN, 1)), seq: seq_ctr & 32'hFFFFF});
          seq_ctr <= seq_ctr + 1;
        end
      end else if (force_one && fixed_dest != int'(ID)) begin
        q.push_back('{dest: fixed_dest, len: 1, seq: seq_ctr & 32'hFFFFF});
        seq_ctr <= seq_ctr + 1;
      end

      // injection
      if (!active && q.size() > 0) begin
        automatic int vsel = -1;
        for (int v = NUM_VC-1; v >= 0; v--)
          if (!vbusy[v] && cr[v] == DEPTH) vsel = v;
        if (vsel >= 0) begin
          automatic head_t h = '0;
          automatic pkt_t  p = q.pop_front();
          h.dest    = node_t'(p.dest);
          h.src     = node_t'(ID);
          h.payload = PAYLOAD_W'({28'(cycle), 4'(p.len), 20'(p.seq)});
          f = '{valid: 1'b1, head: 1'b1, tail: (p.len == 1), vc: VC_W'(vsel), data: FLIT_W'(h)};
          cr[vsel] = cr[vsel] - 1;
          if (p.len > 1) begin
            active      <= 1'b1;
            cur         <= p;
            cur_idx     <= 1;
            vbusy[vsel] <= 1'b1;
          end
          cur_vc <= vsel;
          sent   <= sent + 1;
        end
      end else if (active && cr[cur_vc] > 0) begin
        f = '{valid: 1'b1, head: 1'b0, tail: (cur_idx == cur.len-1), vc: VC_W'(cur_vc),
              data: body_word(ID, cur.dest, cur.seq, cur_idx)};
        cr[cur_vc] = cr[cur_vc] - 1;
        cur_idx <= cur_idx + 1;
        if (cur_idx == cur.len-1) begin
          active        <= 1'b0;
          vbusy[cur_vc] <= 1'b0;
        end
      end
      inj_flit <= f;
      for (int v = 0; v < NUM_VC; v++) cred[v] <= cr[v];

      // sink
      ej_credit <= '{valid: ej_flit.valid, vc: ej_flit.vc};
      if (ej_flit.valid) begin
        automatic int v = int'(ej_flit.vc);
        if (ej_flit.head) begin
          automatic head_t h = head_t'(ej_flit.data);
          automatic int    ln = int'(h.payload[23:20]);
          if (rx_act[v] || int'(h.dest) != int'(ID) || ej_flit.tail != (ln == 1)) errors <= errors + 1;
          rx_src[v]  <= int'(h.src);
          rx_dest[v] <= int'(h.dest);
          rx_seq[v]  <= int'(h.payload[19:0]);
          rx_len[v]  <= ln;
          rx_idx[v]  <= 1;
          rx_t0[v]   <= longint'(h.payload[51:24]);
          if (ej_flit.tail) begin
            recv      <= recv + 1;
            last_lat  <= int'(cycle - longint'(h.payload[51:24]));
            lat_sum   <= lat_sum + (cycle - longint'(h.payload[51:24]));
            rx_act[v] <= 1'b0;
          end else rx_act[v] <= 1'b1;
        end else begin
          if (!rx_act[v] || ej_flit.data != body_word(rx_src[v], rx_dest[v], rx_seq[v], rx_idx[v]) ||
              ej_flit.tail != (rx_idx[v] == rx_len[v]-1))
            errors <= errors + 1;
          rx_idx[v] <= rx_idx[v] + 1;
          if (ej_flit.tail) begin
            rx_act[v] <= 1'b0;
            recv      <= recv + 1;
            last_lat  <= int'(cycle - rx_t0[v]);
            lat_sum   <= lat_sum + (cycle - rx_t0[v]);
          end
        end
      end
    end
  end

endmodule
