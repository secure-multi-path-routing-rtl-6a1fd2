// tb_secure_noc_top -- end-to-end test of the whole mesh at a reduced size.
//
// 4 x 4 mesh, n = 4, s = 8 (64-bit messages), 2-entry buffers and 4
// reassembly slots, so that it builds and runs quickly; tb_secure_noc_top_full
// runs the same test with every parameter at its default.  Every tile sends MSGS random messages: the first to a tile in
// its own row, the second to a tile in its own column, the rest to random
// tiles (diagonal cases in all four directions, and the occasional message to
// itself).  Cores accept delivered messages with random backpressure.
// Checked:
//   * every message arrives once, intact, at its destination, with its source;
//   * no router other than the source and destination routers forwards both
//     packets of any message (the single-malicious-router guarantee);
//   * all traffic drains before the watchdog.
// Mechanisms counted, each must occur: pivot swaps at routers, flip_route
// (same-row messages), same-column messages, each of the four diagonal
// directions, a message to the sender's own tile, Pkt2 arriving before Pkt1, a busy source interface, and core
// backpressure at the destination.
module tb_secure_noc_top;
  import aont_pkg::*;
  localparam int X = 4, Y = 4, K = X * Y, N = 4, S = 8, W = 2;
  localparam int MW = S * N * W;
  localparam int MSGS = 6;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic                msg_in_valid  [K];
  logic                msg_in_ready  [K];
  logic [MW-1:0]       msg_in        [K];
  logic [COORD_W-1:0]  msg_in_dst_x  [K];
  logic [COORD_W-1:0]  msg_in_dst_y  [K];
  logic                msg_out_valid [K];
  logic                msg_out_ready [K];
  logic [MW-1:0]       msg_out       [K];
  logic [COORD_W-1:0]  msg_out_src_x [K];
  logic [COORD_W-1:0]  msg_out_src_y [K];
  logic [K-1:0]        pivot_swap;
  logic [K-1:0]        ooo_arrival;

  secure_noc_top #(.X(X), .Y(Y), .N(N), .S(S), .DEPTH(2), .SLOTS(4)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected messages, per destination: {source, content}
  typedef struct { int src; logic [MW-1:0] m; } exp_t;
  exp_t exp_q [K][$];
  int   sent = 0, received = 0, sent_done = 0;
  int   ev_swap = 0, ev_row = 0, ev_col = 0, ev_self = 0, ev_ooo = 0, ev_busy = 0, ev_bp = 0;
  int   ev_diag [4];
  int   msg_dst [int];        // (src*16 + tag) -> destination
  int   seen_mask [int];      // (router*4096 + src*16 + tag) -> packets forwarded (bit per seq)

  always @(posedge clk) begin
    ev_swap += $countones(pivot_swap);
    ev_ooo  += $countones(ooo_arrival);
  end

  for (genvar t = 0; t < K; t++) begin : g_tile
    // ---- sender
    initial begin
      int dx, dy, sx, sy;
      msg_in_valid[t] = 0; msg_in[t] = '0; msg_in_dst_x[t] = '0; msg_in_dst_y[t] = '0;
      sx = t % X; sy = t / X;
      wait (rst_n);
      repeat ($urandom_range(20, 0)) @(posedge clk);
      for (int m = 0; m < MSGS; m++) begin
        exp_t e;
        if (m == 0)      begin dy = sy; dx = (sx + 1 + $urandom_range(X-2, 0)) % X; end
        else if (m == 1) begin dx = sx; dy = (sy + 1 + $urandom_range(Y-2, 0)) % Y; end
        else if (m == 2 && t == 0) begin dx = sx; dy = sy; end   // local delivery
        else             begin dx = $urandom_range(X-1, 0); dy = $urandom_range(Y-1, 0); end
        for (int w = 0; w < MW; w += 32) msg_in[t][w +: 32] = $urandom();
        msg_in_dst_x[t] = COORD_W'(dx); msg_in_dst_y[t] = COORD_W'(dy);
        #1 msg_in_valid[t] = 1;
        e.src = t; e.m = msg_in[t];
        exp_q[dy*X + dx].push_back(e);
        msg_dst[t*16 + m] = dy*X + dx;
        if (dx == sx && dy == sy) ev_self++;
        else if (dy == sy) ev_row++;
        else if (dx == sx) ev_col++;
        else ev_diag[(dx > sx ? 1 : 0) + (dy > sy ? 2 : 0)]++;
        sent++;
        forever begin
          @(negedge clk);
          if (msg_in_ready[t]) break;
          ev_busy++;
        end
        @(posedge clk);
        #1 msg_in_valid[t] = 0;
        repeat ($urandom_range(30, 0)) @(posedge clk);
      end
      sent_done++;
    end

    // ---- receiver
    always @(posedge clk) msg_out_ready[t] <= ($urandom_range(3, 0) != 0);
    always @(posedge clk) begin
      if (rst_n && msg_out_valid[t] && !msg_out_ready[t]) ev_bp++;
      if (rst_n && msg_out_valid[t] && msg_out_ready[t]) begin
        int src, hit;
        src = int'(msg_out_src_y[t]) * X + int'(msg_out_src_x[t]);
        hit = -1;
        foreach (exp_q[t][i]) if (hit < 0 && exp_q[t][i].src == src && exp_q[t][i].m == msg_out[t]) hit = i;
        check(hit >= 0, $sformatf("tile %0d: message from %0d matches one that was sent", t, src));
        if (hit >= 0) exp_q[t].delete(hit);
        received++;
      end
    end

    // ---- eavesdropper's view: which packets each router forwards
    always @(posedge clk) begin
      if (rst_n) begin
        for (int o = 0; o < NPORTS; o++) begin
          if ((dut.g_row[t / X].g_col[t % X].u_router.out_valid[o] &
               dut.g_row[t / X].g_col[t % X].u_router.out_ready[o]) != '0) begin
            hdr_t h;
            int key;
            h = dut.g_row[t / X].g_col[t % X].u_router.out_hdr[o];
            key = t * 4096 + (int'(h.src_y) * X + int'(h.src_x)) * 16 + int'(h.tag);
            seen_mask[key] = (seen_mask.exists(key) ? seen_mask[key] : 0) | (1 << h.seq);
          end
        end
      end
    end
  end

  initial begin
    int leaks, pending;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent_done == K);
    wait (received == sent);
    repeat (20) @(posedge clk);
    pending = 0;
    for (int t = 0; t < K; t++) pending += exp_q[t].size();
    check(pending == 0, $sformatf("all messages delivered (%0d missing)", pending));
    check(received == K * MSGS, $sformatf("received %0d of %0d", received, K * MSGS));
    leaks = 0;
    foreach (seen_mask[key]) begin
      int r, st, d;
      r = key / 4096; st = (key % 4096) / 16;
      d = msg_dst[key % 4096];
      if (seen_mask[key] == 3 && r != st && r != d) leaks++;
    end
    check(leaks == 0, $sformatf("%0d intermediate routers saw both packets of a message", leaks));
    $display("messages %0d, swaps %0d, same-row(flip) %0d, same-col %0d, self %0d, diag %0d/%0d/%0d/%0d, ooo %0d, busy %0d, core bp %0d",
             received, ev_swap, ev_row, ev_col, ev_self, ev_diag[0], ev_diag[1], ev_diag[2], ev_diag[3], ev_ooo, ev_busy, ev_bp);
    check(ev_swap > 0, "pivot swaps happened");
    check(ev_row > 0,  "same-row (flip_route) messages happened");
    check(ev_col > 0,  "same-column messages happened");
    for (int q = 0; q < 4; q++) check(ev_diag[q] > 0, $sformatf("diagonal direction %0d happened", q));
    check(ev_ooo > 0,  "Pkt2-before-Pkt1 arrivals happened");
    check(ev_self > 0, "a message to the sending tile itself happened");
    check(ev_busy > 0, "source interface busy happened");
    check(ev_bp > 0,   "core backpressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d received %0d", sent, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
