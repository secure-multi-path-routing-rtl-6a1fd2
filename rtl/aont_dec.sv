// aont_dec -- inverse quasigroup all-or-nothing transform (receiver side).
//
// Given all s+1 pseudo-blocks B'_1..B'_(s+1):
//   C_s = B'_1 * B'_2 * ... * B'_s        (element-wise product modulo p)
//   K'  = B'_(s+1) * C_s^(-1)             (element-wise, inverse modulo p)
// then rebuilds the quasigroup and its dual from K', recomputes the leader l
// and the masks r_ij exactly as the sender did, and undoes each element with
// the dual operation: h_ij = r_ij o h'_ij.  If any pseudo-block is missing or
// altered, K' and therefore every block of M comes out wrong.
//
// The paper writes the key recovery as "K' <- C_s / B'_(s+1)", but its own
// transform sets B'_(s+1) = C_s * K', which gives K' = B'_(s+1) / C_s; the
// latter is used here.
//
// Interface: `start` presents `pseudo` (layout as in aont_enc).  Cycle 1
// registers the recovered key, cycle 2 the quasigroup and dual tables, cycle 3
// registers `msg` with a one-cycle `done` pulse (latency 3).  `msg` holds
// until the next result.
module aont_dec
  import aont_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter int unsigned S = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [(S+1)*N*$clog2(N)-1:0] pseudo,
  output logic                         done,
  output logic [S*N*$clog2(N)-1:0]     msg
);
  localparam int unsigned W  = $clog2(N);
  localparam int unsigned BW = N * W;

  logic [(S+1)*BW-1:0] pseudo_q;
  logic [W-1:0]        key_d [N];
  logic [W-1:0]        key_q [N];
  logic                st1_q, st2_q;
  logic [W-1:0]        ls   [N][N];
  logic [W-1:0]        dual [N][N];
  logic                qg_valid;
  logic [S*BW-1:0]     msg_d;

  // key recovery from the incoming pseudo-blocks
  always_comb begin
    logic [W-1:0] c;
    for (int unsigned j = 0; j < N; j++) begin
      c = pseudo[j*W +: W];
      for (int unsigned i = 2; i <= S; i++)
        c = W'(gf_mul(W_MAX'(c), W_MAX'(pseudo[(i-1)*BW + j*W +: W]), W));
      key_d[j] = W'(gf_mul(W_MAX'(pseudo[S*BW + j*W +: W]), gf_inv(W_MAX'(c), W), W));
    end
  end

  quasigroup_gen #(.N(N)) u_qg (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (st1_q),
    .key   (key_q),
    .ls    (ls),
    .dual  (dual),
    .valid (qg_valid)
  );

  always_comb begin
    logic [W-1:0] l, r;
    logic [63:0]  iv;
    logic [W-1:0] dig;
    l = key_q[0];
    for (int unsigned j = 1; j < N; j++) l = ls[key_q[j]][l];
    msg_d = '0;
    for (int unsigned i = 1; i <= S; i++) begin
      iv = 64'(i);
      r  = l;
      for (int unsigned jj = N; jj >= 1; jj--) begin
        dig = W'(iv >> (W * (N - jj)));
        r   = ls[r][dig];
        msg_d[(i-1)*BW + (jj-1)*W +: W] = dual[r][pseudo_q[(i-1)*BW + (jj-1)*W +: W]];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pseudo_q <= '0;
      st1_q    <= 1'b0;
      st2_q    <= 1'b0;
      done     <= 1'b0;
      msg      <= '0;
      for (int unsigned j = 0; j < N; j++) key_q[j] <= '0;
    end else begin
      st1_q <= start;
      st2_q <= st1_q;
      done  <= st2_q;
      if (start) begin
        pseudo_q <= pseudo;
        key_q    <= key_d;
      end
      if (st2_q) msg <= msg_d;
    end
  end

  a_table_ready: assert property (@(posedge clk) disable iff (!rst_n) st2_q |-> qg_valid);
endmodule
