// tb_path_gen -- exhaustive disjointness check of the two-path selection.
//
// For a 4 x 4 and an 8 x 8 mesh, every ordered source/destination pair with
// S != D is tried with 16 random values.  The two routes are traced with the
// reference routing (blue: YX to the blue pivot, then YX, or XY if flip_route
// is set; red: XY, then XY) and must share no router except S and D, so a
// single malicious router can never see both packets (the 0 % entries of the
// eavesdropping table).  Pivots must lie inside the mesh; for the diagonal
// cases the blue pivot must lie in the region of the blue-region table (e.g.
// below S and left of D) and the red pivot outside it; flip_route must be set
// exactly for the same-row case.  The number of pairs where a fixed set of
// two malicious routers would see both halves is also counted and printed.
module tb_path_gen;
  import aont_pkg::*;
  import aont_ref_pkg::*;
  int checks = 0, failures = 0;
  bit fin [2];
  int cases [4];   // diagonal, same row, same column, S = D

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int M = (g == 0) ? 4 : 8;
    logic [COORD_W-1:0] sx, sy, dx, dy, bx, by, rx, ry;
    logic [31:0]        rnd;
    logic               flip;

    path_gen #(.X(M), .Y(M)) dut (
      .src_x(sx), .src_y(sy), .dst_x(dx), .dst_y(dy), .rnd(rnd),
      .blue_x(bx), .blue_y(by), .red_x(rx), .red_y(ry), .flip(flip));

    initial begin
      #(g * 5 + 1);
      for (int s = 0; s < M*M; s++) begin
        for (int d = 0; d < M*M; d++) begin
          for (int t = 0; t < 16; t++) begin
            automatic int bpx[$], bpy[$], rpx[$], rpy[$];
            automatic int onb [int];
            int overlap;
            int isx, isy, idx, idy, ibx, iby, irx, iry;
            bit in_blue;
            isx = s % M; isy = s / M; idx = d % M; idy = d / M;
            sx = COORD_W'(isx); sy = COORD_W'(isy); dx = COORD_W'(idx); dy = COORD_W'(idy);
            rnd = $urandom();
            #1;
            ibx = int'(bx); iby = int'(by); irx = int'(rx); iry = int'(ry);
            if (s == d) begin
              cases[3]++;
              check(ibx == isx && iby == isy && irx == isx && iry == isy, "S = D keeps both pivots at S");
              continue;
            end
            check(ibx < M && iby < M && irx < M && iry < M, "pivots inside the mesh");
            check(flip == (isy == idy), "flip_route only for the same row");
            if (isy != idy && isx != idx) begin
              cases[0]++;
              // Table I: rows on D's side of S, columns on S's side of D
              in_blue = ((idy > isy) ? (iby > isy) : (iby < isy)) &&
                        ((idx > isx) ? (ibx < idx) : (ibx > idx));
              check(in_blue, $sformatf("blue pivot (%0d,%0d) in blue region for S(%0d,%0d) D(%0d,%0d)", ibx, iby, isx, isy, idx, idy));
              in_blue = ((idy > isy) ? (iry > isy) : (iry < isy)) &&
                        ((idx > isx) ? (irx < idx) : (irx > idx));
              check(!in_blue, "red pivot outside the blue region");
            end else if (isy == idy) cases[1]++;
            else cases[2]++;
            // trace both routes
            trace(isx, isy, ibx, iby, 1'b1, bpx, bpy);
            trace(ibx, iby, idx, idy, !flip, bpx, bpy);
            trace(isx, isy, irx, iry, 1'b0, rpx, rpy);
            trace(irx, iry, idx, idy, 1'b0, rpx, rpy);
            foreach (bpx[i]) onb[bpy[i]*M + bpx[i]] = 1;
            overlap = 0;
            foreach (rpx[i]) begin
              int id;
              id = rpy[i]*M + rpx[i];
              if (id != s && id != d && onb.exists(id)) overlap++;
            end
            check(overlap == 0, $sformatf("%0dx%0d S(%0d,%0d) D(%0d,%0d) B(%0d,%0d) R(%0d,%0d) flip=%0d: %0d shared routers",
                                          M, M, isx, isy, idx, idy, ibx, iby, irx, iry, flip, overlap));
            check(bpx[bpx.size()-1] == idx && bpy[bpy.size()-1] == idy, "blue route ends at D");
          end
        end
      end
      fin[g] = 1;
    end
  end

  initial begin
    wait (fin[0] && fin[1]);
    $display("cases: diagonal %0d, same row %0d, same column %0d, S=D %0d", cases[0], cases[1], cases[2], cases[3]);
    for (int c = 0; c < 4; c++) check(cases[c] > 0, "every case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
