// perm_gen -- source of the random permutation key K'.
//
// The AONT draws a fresh random permutation K' = (k_1 .. k_n) of the symbols
// 1..n for every message; K' is the first row of the quasigroup's Latin square
// and is hidden inside the last pseudo-block, so it is never shared with the
// receiver in advance.  The paper only names this step ("K' <- random
// permutation"); this implementation keeps a permutation register that starts
// as the identity and, every clock, swaps the entry at a running index with an
// entry picked by a 32-bit Galois LFSR.  Each step is a transposition, so the
// register always holds a valid permutation, and a message samples whatever
// the register holds when it starts.  Not cryptographically strong; a true
// random number generator could replace the LFSR.
//
// key[j] is k_(j+1) as a symbol code (code 0 = symbol n).  Output registered.
module perm_gen #(
  parameter int unsigned N    = 4,            // quasigroup order n (power of two)
  parameter logic [31:0] SEED = 32'h1ACE_B00C // LFSR seed, must be non-zero
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic [$clog2(N)-1:0] key [N]
);
  localparam int unsigned W = $clog2(N);

  logic [31:0]  lfsr_q;
  logic [W-1:0] idx_q;
  logic [W-1:0] other;

  // taps 32,22,2,1 (maximal length)
  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  assign other = lfsr_q[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q <= SEED;
      idx_q  <= '0;
      for (int unsigned j = 0; j < N; j++) key[j] <= W'(j + 1);   // identity
    end else begin
      lfsr_q <= lfsr_next(lfsr_q);
      idx_q  <= idx_q + 1'b1;
      key[idx_q] <= key[other];
      key[other] <= key[idx_q];
    end
  end
endmodule
