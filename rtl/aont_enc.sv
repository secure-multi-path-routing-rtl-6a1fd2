// aont_enc -- quasigroup all-or-nothing transform (sender side).
//
// The message M is cut into s blocks B_i of n symbols h_i1..h_in (w = log2 n
// bits each, code 0 = symbol n).  With the quasigroup <Q, .> built from a
// random permutation key K' = (k_1..k_n):
//   leader      l = l_n,  l_1 = k_1,  l_j = k_j . l_(j-1)
//   index       I(i) = base-n digits (i_i1 .. i_in) of the block number i,
//               most significant first, digit 0 written as symbol n
//   mask        r_in = l . i_in,  r_i(j-1) = r_ij . i_i(j-1)
//   pseudo      h'_ij = r_ij . h_ij                     (blocks B'_1..B'_s)
//   check       C_1 = B'_1,  C_i = C_(i-1) * B'_i,  B'_(s+1) = C_s * K'
// where * is the element-wise product modulo p.  B'_(s+1) hides K' behind the
// product of all other pseudo-blocks, so the receiver needs every block to
// recover K' and with it any part of M.  The paper's listing multiplies the
// original blocks B_i into C; the receiver, however, can only form the product
// of the pseudo-blocks, so this design (like the inverse transform in the
// paper) uses B'_i.
//
// Interface: `start` samples `msg` and `key`; the quasigroup table is
// registered in the next cycle and the s+1 pseudo-blocks are registered one
// cycle after that, with a one-cycle `done` pulse (latency 2).  `pseudo` holds
// its value until the next result.  Block i (1-based) sits at bits
// [(i-1)*n*w +: n*w]; element j at [(j-1)*w +: w] inside its block.  The
// transform of all blocks is computed in parallel, as the paper intends.
// The dual table from quasigroup_gen is received but not used here: only the
// decoder needs it.
module aont_enc
  import aont_pkg::*;
#(
  parameter int unsigned N = 4,    // quasigroup order n (2, 4, 16 or 256)
  parameter int unsigned S = 64    // message blocks s (even)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [S*N*$clog2(N)-1:0]   msg,
  input  logic [$clog2(N)-1:0]       key    [N],
  output logic                       done,
  output logic [(S+1)*N*$clog2(N)-1:0] pseudo
);
  localparam int unsigned W  = $clog2(N);
  localparam int unsigned BW = N * W;     // bits per block

  logic [S*BW-1:0] msg_q;
  logic [W-1:0]    key_q [N];
  logic            stage1_q;               // table being built
  logic [W-1:0]    ls   [N][N];
  logic [W-1:0]    dual [N][N];
  logic            qg_valid;
  logic [(S+1)*BW-1:0] pseudo_d;

  quasigroup_gen #(.N(N)) u_qg (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (start),
    .key   (key),
    .ls    (ls),
    .dual  (dual),
    .valid (qg_valid)
  );

  always_comb begin
    logic [W-1:0]  l, r, h, hp;
    logic [W-1:0]  c [N];
    logic [63:0]   iv;
    logic [W-1:0]  dig;
    l = key_q[0];
    for (int unsigned j = 1; j < N; j++) l = ls[key_q[j]][l];
    for (int unsigned j = 0; j < N; j++) c[j] = '0;
    pseudo_d = '0;
    for (int unsigned i = 1; i <= S; i++) begin
      iv = 64'(i);
      r  = l;
      for (int unsigned jj = N; jj >= 1; jj--) begin
        // digit i_(i,jj): jj = N is the least significant
        dig = W'(iv >> (W * (N - jj)));
        r   = ls[r][dig];
        h   = msg_q[(i-1)*BW + (jj-1)*W +: W];
        hp  = ls[r][h];
        pseudo_d[(i-1)*BW + (jj-1)*W +: W] = hp;
        c[jj-1] = (i == 1) ? hp : W'(gf_mul(W_MAX'(c[jj-1]), W_MAX'(hp), W));
      end
    end
    for (int unsigned j = 0; j < N; j++)
      pseudo_d[S*BW + j*W +: W] = W'(gf_mul(W_MAX'(c[j]), W_MAX'(key_q[j]), W));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      msg_q    <= '0;
      stage1_q <= 1'b0;
      done     <= 1'b0;
      pseudo   <= '0;
      for (int unsigned j = 0; j < N; j++) key_q[j] <= '0;
    end else begin
      stage1_q <= start;
      done     <= stage1_q;
      if (start) begin
        msg_q <= msg;
        key_q <= key;
      end
      if (stage1_q) pseudo <= pseudo_d;
    end
  end

  // the table must be ready when the pseudo-blocks are formed
  a_table_ready: assert property (@(posedge clk) disable iff (!rst_n) stage1_q |-> qg_valid);
endmodule
