// tb_ni_src -- checks the source interface: packets, headers, payload split, timing.
//
// Interface at (1, 2) of a 4 x 4 mesh, n = 4, s = 8.  40 random messages to
// random other tiles.  For each: Pkt1 must be offered on VC 1 exactly 3
// clocks after the message is accepted, with a header aimed at the blue pivot
// (YX mode, seq 0, fin_id = destination, flip_route set exactly for the same
// row); Pkt2 follows on VC 0 (XY, seq 1, same tag).  The two payloads,
// joined in sequence order, are decoded with the reference inverse AONT and
// must give back the message.  The router side randomly withholds ready,
// and the core must see msg_ready low while a message is in progress.
module tb_ni_src;
  import aont_pkg::*;
  import aont_ref_pkg::*;
  localparam int N = 4, S = 8, W = 2, BW = N * W;
  localparam int PW = (S / 2 + 1) * BW;
  localparam int MX = 1, MY = 2;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic               msg_valid, msg_ready;
  logic [S*BW-1:0]    msg_data;
  logic [COORD_W-1:0] msg_dst_x, msg_dst_y;
  hdr_t               inj_hdr;
  logic [PW-1:0]      inj_pay;
  logic [1:0]         inj_valid, inj_ready;

  ni_src #(.X(4), .Y(4), .N(N), .S(S), .MY_X(MX), .MY_Y(MY)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // random backpressure from the router
  always @(posedge clk) inj_ready <= ($urandom_range(3, 0) != 0) ? 2'b11 : 2'b00;

  initial begin
    int m[], ps[], m2[], k2[];
    int dx, dy, cyc;
    hdr_t h1, h2;
    logic [PW-1:0] p1, p2;
    msg_valid = 0; msg_data = '0; msg_dst_x = '0; msg_dst_y = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      do begin dx = $urandom_range(3, 0); dy = $urandom_range(3, 0); end while (dx == MX && dy == MY);
      if (t < 4) begin dy = MY; if (dx == MX) dx = 3; end   // make sure the same-row case occurs
      m = new[S*N];
      foreach (m[e]) begin m[e] = $urandom_range(N-1, 0); msg_data[e*W +: W] = W'(m[e]); end
      @(negedge clk);
      msg_valid = 1; msg_dst_x = COORD_W'(dx); msg_dst_y = COORD_W'(dy);
      check(msg_ready, "idle interface is ready");
      @(negedge clk);
      msg_valid = 0;
      cyc = 1;
      while (!inj_valid[1]) begin
        check(!msg_ready, "busy interface is not ready");
        @(negedge clk); cyc++;
      end
      check(cyc == 3, $sformatf("Pkt1 offered %0d clocks after acceptance, expected 3", cyc));
      check(inj_valid == 2'b10, "Pkt1 on VC 1 only");
      while (!(inj_valid[1] && inj_ready[1])) @(negedge clk);
      h1 = inj_hdr; p1 = inj_pay;
      @(negedge clk);
      while (!(inj_valid[0] && inj_ready[0])) begin
        check(inj_valid != 2'b10, "Pkt1 not repeated after it was taken");
        @(negedge clk);
      end
      h2 = inj_hdr; p2 = inj_pay;
      check(inj_valid == 2'b01, "Pkt2 on VC 0 only");
      check(h1.fin_x == COORD_W'(dx) && h1.fin_y == COORD_W'(dy) && h2.fin_x == COORD_W'(dx) && h2.fin_y == COORD_W'(dy), "fin_id");
      check(h1.src_x == MX && h1.src_y == MY && h2.src_x == MX && h2.src_y == MY, "source in header");
      check(!h1.phase2 && !h2.phase2, "packets start towards their pivots");
      check(h1.mode == MODE_YX && h2.mode == MODE_XY, "blue packet YX, red packet XY");
      check(h1.seq == 0 && h2.seq == 1, "sequence numbers");
      check(h1.tag == TAG_W'(t) && h2.tag == TAG_W'(t), "message tag counts messages");
      check(h1.flip == (dy == MY), "flip_route set for the same row");
      check(!h2.flip, "red packet never flips");
      ps = new[(S+1)*N];
      for (int e = 0; e < (S/2)*N; e++) ps[e] = int'(p1[e*W +: W]);
      for (int e = 0; e < (S/2+1)*N; e++) ps[(S/2)*N + e] = int'(p2[e*W +: W]);
      check(p1[PW-1 -: BW] == '0, "Pkt1's unused top block is zero");
      decode(ps, N, S, m2, k2);
      check(m2 == m, $sformatf("message %0d recovered from Pkt1 and Pkt2 by the reference inverse", t));
      begin
        int mask;
        mask = 0;
        foreach (k2[j]) mask |= 1 << k2[j];
        check(mask == (1 << N) - 1, "hidden key is a permutation");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
