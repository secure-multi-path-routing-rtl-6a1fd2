// quasigroup_gen -- builds the quasigroup <Q, .> and its dual <Q, o> from K'.
//
// Follows the paper's quasigroup construction: the first row of the Latin
// square is the key K' = (q_11 .. q_1n), and row i holds q_ij = (i * q_1j) mod p.
// Because p is prime and K' is a permutation, every row and column is a
// permutation, so the square is the multiplication table of a quasigroup of
// order n = p - 1:  a . b = q_ab.  The dual table q'_ax = j for x = q_aj gives
// a o c = the b with a . b = c, so a o (a . b) = b.
//
// Tables are indexed by symbol codes (code 0 = symbol n), ls[a][b] = a . b and
// dual[a][c] = a o c.  All n*n entries are computed in parallel; `load`
// captures them one clock later and raises `valid`, which stays high until the
// next `load`.  Sender and receiver each hold one instance.
module quasigroup_gen
  import aont_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [$clog2(N)-1:0] key  [N],
  output logic [$clog2(N)-1:0] ls   [N][N],
  output logic [$clog2(N)-1:0] dual [N][N],
  output logic                 valid
);
  localparam int unsigned W = $clog2(N);

  logic [W-1:0] ls_d   [N][N];
  logic [W-1:0] dual_d [N][N];

  always_comb begin
    logic [W-1:0] q;
    for (int unsigned a = 0; a < N; a++)
      for (int unsigned c = 0; c < N; c++) begin
        ls_d[a][c]   = '0;
        dual_d[a][c] = '0;
      end
    for (int unsigned a = 0; a < N; a++) begin        // row symbol a (code)
      for (int unsigned j = 1; j <= N; j++) begin     // column j = 1..n
        q = W'(gf_mul(W_MAX'(a), W_MAX'(key[j-1]), W));
        ls_d[a][W'(j)]   = q;       // column j has code j mod n
        dual_d[a][q]     = W'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      for (int unsigned a = 0; a < N; a++)
        for (int unsigned c = 0; c < N; c++) begin
          ls[a][c]   <= '0;
          dual[a][c] <= '0;
        end
    end else if (load) begin
      valid <= 1'b1;
      ls    <= ls_d;
      dual  <= dual_d;
    end
  end
endmodule
