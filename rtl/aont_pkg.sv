// aont_pkg -- shared types, constants and arithmetic for the AONT multi-path NoC.
//
// Symbols of the quasigroup AONT are the non-zero residues 1..n of the prime
// p = n + 1, where n = 2**w is a power of two, so p is a Fermat prime (3, 5, 17,
// 257).  A symbol is carried in w bits; the code 0 stands for the symbol n,
// as in the paper's example where the base-4 digit 0 is written as "4".
// gf_mul() multiplies two symbols modulo p with the Fermat-prime shortcut
// x mod (2**w + 1) = (x mod 2**w) - (x div 2**w), adjusted once by +p;
// gf_inv() raises a symbol to p - 2 = 2**w - 1 (Fermat's little theorem) by w
// squarings.  Both are combinational and take w as an argument (w <= 8).
//
// hdr_t is the packet header.  The paper asks for the pivot router and the
// final destination (fin_id) in the header plus a sequence number; the
// remaining fields (phase, routing mode, flip flag, message tag, source) and
// all widths are this implementation's own choices.
// gf_mul sizes its temporaries for the largest symbol width W_MAX, so for
// smaller w their upper bits are unused.
package aont_pkg;

  localparam int unsigned COORD_W = 4;   // mesh coordinates up to 16 x 16
  localparam int unsigned TAG_W   = 4;   // message tag, pairs Pkt1 with Pkt2
  localparam int unsigned W_MAX   = 8;   // widest symbol supported (n = 256)

  // routing mode, which is also the virtual channel the packet occupies
  typedef enum logic {
    MODE_XY = 1'b0,   // red path, VC 0
    MODE_YX = 1'b1    // blue path, VC 1
  } mode_e;

  // router port numbering; y grows downwards (row 0 is the top row)
  typedef enum logic [2:0] {
    PORT_N = 3'd0,
    PORT_E = 3'd1,
    PORT_S = 3'd2,
    PORT_W = 3'd3,
    PORT_L = 3'd4
  } port_e;

  localparam int unsigned NPORTS = 5;
  localparam int unsigned NVC    = 2;

  typedef struct packed {
    logic [COORD_W-1:0] dst_x;   // current target: pivot, then final destination
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] fin_x;   // final destination (fin_id)
    logic [COORD_W-1:0] fin_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    logic               phase2;  // 0: heading for the pivot, 1: for fin_id
    mode_e              mode;    // XY or YX
    logic               flip;    // flip_route: switch YX -> XY at the pivot
    logic               seq;     // 0: Pkt1 (first half), 1: Pkt2 (second half)
    logic [TAG_W-1:0]   tag;     // per-source message number
  } hdr_t;

  localparam int unsigned HDR_W = $bits(hdr_t);

  // symbol code (w bits, 0 means n) times symbol code, modulo p = 2**w + 1
  function automatic logic [W_MAX-1:0] gf_mul(input logic [W_MAX-1:0] a,
                                               input logic [W_MAX-1:0] b,
                                               input int unsigned w);
    logic [W_MAX:0]     n_val;
    logic [W_MAX:0]     av, bv;
    logic [2*W_MAX+1:0] prod, lo, hi;
    logic [W_MAX-1:0]   mask;
    logic [W_MAX+1:0]   r;
    mask  = W_MAX'((1 << w) - 1);
    n_val = (W_MAX+1)'(1 << w);
    av    = ((a & mask) == '0) ? n_val : {1'b0, a & mask};
    bv    = ((b & mask) == '0) ? n_val : {1'b0, b & mask};
    prod  = (2*W_MAX+2)'(av) * (2*W_MAX+2)'(bv);
    lo    = prod & (2*W_MAX+2)'(mask);
    hi    = prod >> w;
    // lo < 2**w and hi <= 2**w, so lo - hi + p lies in 1 .. 2p-1
    r     = (W_MAX+2)'(lo) + (W_MAX+2)'(n_val) + 1'b1 - (W_MAX+2)'(hi);
    if (r > (W_MAX+2)'(n_val)) r = r - (W_MAX+2)'(n_val) - 1'b1;
    return r[W_MAX-1:0] & mask;   // the residue n maps to code 0
  endfunction

  // multiplicative inverse of a symbol modulo p: a**(2**w - 1)
  function automatic logic [W_MAX-1:0] gf_inv(input logic [W_MAX-1:0] a,
                                               input int unsigned w);
    logic [W_MAX-1:0] r, base;
    r    = W_MAX'(1);
    base = a;
    for (int unsigned k = 0; k < W_MAX; k++) begin
      if (k < w) begin
        r    = gf_mul(r, base, w);
        base = gf_mul(base, base, w);
      end
    end
    return r;
  endfunction

endpackage
