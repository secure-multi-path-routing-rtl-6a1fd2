// path_gen -- non-overlapping two-path selection (blue and red pivot routers).
//
// For a source S = (sx, sy) and destination D = (dx, dy) on an X x Y mesh
// (x grows to the right, y grows downwards, row 0 on top) the mesh is split
// into a blue and a red region and one pivot router is drawn at random from
// each.  Pkt1 travels S -> blue pivot -> D with YX routing, Pkt2 travels
// S -> red pivot -> D with XY routing, and the two routes share no router
// other than S and D.
//
// Diagonal cases (Table "blue region selection"): the blue region is every
// router strictly on D's side of S's row and strictly on S's side of D's
// column, e.g. "below src and left of dest" when D is bottom-right of S.  The
// rest of the mesh is red; it is the union of two rectangles (S's row and the
// rows away from D; and D's column and beyond, on D's side of S's row), and
// a random bit chooses which of the two the red pivot comes from.
//
// Same row: the mesh is split into the rows above and below S's row.  Blue
// takes the side with more rows beyond S (rows above if S is in the lower
// half), red the other side together with S's row, and flip_route is set so
// the blue packet continues XY after its pivot.
//
// Same column: the mesh is split into the columns left and right of S's
// column; red takes one side together with S's column (any row).  With the
// paper's flip (YX -> XY at the pivot) the blue packet would return along
// S's column and meet the red one, so this design instead keeps blue on YX
// and draws the blue pivot on S's own row: the blue route then is S's row,
// the pivot's column and D's row, all on the blue side.  flip_route stays 0.
//
// S = D: both pivots are S, no flip.
//
// Random picks: a value in [lo, hi] is lo + ((r * (hi - lo + 1)) >> 8) for an
// 8-bit random slice r.  Purely combinational.
module path_gen
  import aont_pkg::*;
#(
  parameter int unsigned X = 8,
  parameter int unsigned Y = 8
) (
  input  logic [COORD_W-1:0] src_x,
  input  logic [COORD_W-1:0] src_y,
  input  logic [COORD_W-1:0] dst_x,
  input  logic [COORD_W-1:0] dst_y,
  input  logic [31:0]        rnd,
  output logic [COORD_W-1:0] blue_x,
  output logic [COORD_W-1:0] blue_y,
  output logic [COORD_W-1:0] red_x,
  output logic [COORD_W-1:0] red_y,
  output logic               flip
);
  function automatic logic [COORD_W-1:0] pick(input int unsigned lo,
                                               input int unsigned hi,
                                               input logic [7:0]  r);
    int unsigned span;
    span = hi - lo + 1;
    return COORD_W'(lo + ((int'(r) * span) >> 8));
  endfunction

  always_comb begin
    int unsigned sx, sy, dx, dy;
    int unsigned b_x0, b_x1, b_y0, b_y1;   // blue rectangle
    int unsigned r_x0, r_x1, r_y0, r_y1;   // chosen red rectangle
    sx = int'(src_x); sy = int'(src_y);
    dx = int'(dst_x); dy = int'(dst_y);
    flip = 1'b0;
    b_x0 = sx; b_x1 = sx; b_y0 = sy; b_y1 = sy;
    r_x0 = sx; r_x1 = sx; r_y0 = sy; r_y1 = sy;
    if (sx == dx && sy == dy) begin
      // local delivery: both pivots at the source
    end else if (sy == dy) begin
      flip = 1'b1;
      b_x0 = 0; b_x1 = X - 1;
      r_x0 = 0; r_x1 = X - 1;
      if (sy >= Y / 2) begin
        b_y0 = 0;  b_y1 = sy - 1;
        r_y0 = sy; r_y1 = Y - 1;
      end else begin
        b_y0 = sy + 1; b_y1 = Y - 1;
        r_y0 = 0;      r_y1 = sy;
      end
    end else if (sx == dx) begin
      b_y0 = sy; b_y1 = sy;
      r_y0 = 0;  r_y1 = Y - 1;
      if (sx >= X / 2) begin
        b_x0 = 0;  b_x1 = sx - 1;
        r_x0 = sx; r_x1 = X - 1;
      end else begin
        b_x0 = sx + 1; b_x1 = X - 1;
        r_x0 = 0;      r_x1 = sx;
      end
    end else begin
      // rows strictly on D's side of S, columns strictly on S's side of D
      if (dy > sy) begin b_y0 = sy + 1; b_y1 = Y - 1; end
      else         begin b_y0 = 0;      b_y1 = sy - 1; end
      if (dx > sx) begin b_x0 = 0;      b_x1 = dx - 1; end
      else         begin b_x0 = dx + 1; b_x1 = X - 1;  end
      if (rnd[31]) begin
        // red part 1: S's row and every row away from D, all columns
        r_x0 = 0; r_x1 = X - 1;
        if (dy > sy) begin r_y0 = 0;  r_y1 = sy;    end
        else         begin r_y0 = sy; r_y1 = Y - 1; end
      end else begin
        // red part 2: D's column and beyond, rows on D's side of S
        r_y0 = b_y0; r_y1 = b_y1;
        if (dx > sx) begin r_x0 = dx; r_x1 = X - 1; end
        else         begin r_x0 = 0;  r_x1 = dx;    end
      end
    end
    blue_x = pick(b_x0, b_x1, rnd[7:0]);
    blue_y = pick(b_y0, b_y1, rnd[15:8]);
    red_x  = pick(r_x0, r_x1, rnd[23:16]);
    red_y  = pick(r_y0, r_y1, {rnd[30:24], rnd[7]});
  end
endmodule
