// tb_ni_dst -- checks reassembly, inverse AONT, arrival order and backpressure.
//
// n = 4, s = 8, 2 reassembly slots.  Messages from several sources are
// encoded with the reference AONT and split into Pkt1 / Pkt2 the way the
// sender does.  Orders tried: Pkt1 then Pkt2; Pkt2 then Pkt1 (the
// out-of-order event must fire); two messages interleaved (A1 B2 A2 B1).
// Every delivered message and its source must match, in completion order,
// and out_valid must rise 4 clocks after the completing packet is taken.
// Random core backpressure (out_ready low) must hold the output stable and
// stop the interface from taking more packets.
module tb_ni_dst;
  import aont_pkg::*;
  import aont_ref_pkg::*;
  localparam int N = 4, S = 8, W = 2, BW = N * W;
  localparam int PW = (S / 2 + 1) * BW;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hdr_t               ej_hdr;
  logic [PW-1:0]      ej_pay;
  logic [1:0]         ej_valid, ej_ready;
  logic               out_valid, out_ready;
  logic [S*BW-1:0]    out_msg;
  logic [COORD_W-1:0] out_src_x, out_src_y;
  logic               ooo_evt;
  int                 ooo = 0;

  ni_dst #(.N(N), .S(S), .SLOTS(2)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  typedef struct { hdr_t h; logic [PW-1:0] p; } pkt_t;
  typedef struct { logic [S*BW-1:0] m; int sx; int sy; } exp_t;
  exp_t exp_q [$];
  int   delivered = 0, stalls = 0;
  int   last_take = 0, cyc = 0;
  bit   bp_on = 0;
  bit   lat_on = 1;

  always @(posedge clk) cyc++;
  always @(posedge clk) if (ooo_evt) ooo++;
  always @(posedge clk) out_ready <= bp_on ? ($urandom_range(1, 0) == 1) : 1'b1;

  // make the two packets of one message from source (sx, sy) with tag
  task automatic make_msg(int sx, int sy, int tag, output pkt_t p1, output pkt_t p2);
    int m[], k[], ps[];
    exp_t e;
    m = new[S*N];
    foreach (m[i]) begin m[i] = $urandom_range(N-1, 0); e.m[i*W +: W] = W'(m[i]); end
    random_key(N, k);
    encode(m, k, N, S, ps);
    p1.h = '0; p1.h.src_x = COORD_W'(sx); p1.h.src_y = COORD_W'(sy); p1.h.tag = TAG_W'(tag);
    p1.h.phase2 = 1; p1.h.seq = 0; p1.h.mode = MODE_YX;
    p2.h = p1.h; p2.h.seq = 1; p2.h.mode = MODE_XY;
    p1.p = '0; p2.p = '0;
    for (int i = 0; i < (S/2)*N; i++)   p1.p[i*W +: W] = W'(ps[i]);
    for (int i = 0; i < (S/2+1)*N; i++) p2.p[i*W +: W] = W'(ps[(S/2)*N + i]);
    e.sx = sx; e.sy = sy;
    exp_q.push_back(e);
  endtask

  task automatic send(pkt_t p, bit completes);
    ej_hdr = p.h; ej_pay = p.p;
    ej_valid = 2'b00;
    ej_valid[p.h.mode] = 1'b1;
    forever begin
      @(negedge clk);
      if (ej_ready[p.h.mode]) break;
      stalls++;
    end
    @(posedge clk);
    #1 if (completes) last_take = cyc;
    ej_valid = 2'b00;
  endtask

  // checker: messages complete in the order their second packet arrives
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && out_valid && out_ready) begin
        exp_t e;
        check(exp_q.size() > 0, "unexpected message");
        if (exp_q.size() > 0) begin
          e = exp_q.pop_front();
          check(out_msg == e.m, $sformatf("message %0d content", delivered));
          check(int'(out_src_x) == e.sx && int'(out_src_y) == e.sy, $sformatf("message %0d source", delivered));
        end
        delivered++;
      end
    end
  end

  // latency: out_valid rises 4 clocks after the completing packet was taken
  initial begin
    logic ov_q;
    ov_q = 0;
    forever begin
      @(posedge clk); #2;
      if (rst_n && lat_on && out_valid && !ov_q) check(cyc - last_take == 4, $sformatf("latency %0d, expected 4", cyc - last_take));
      ov_q = out_valid;
    end
  end

  initial begin
    pkt_t a1, a2, b1, b2;
    exp_t tmp;
    ej_valid = '0; ej_hdr = '0; ej_pay = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      // in order
      make_msg(t % 4, 1, t, a1, a2);
      send(a1, 0); send(a2, 1);
      repeat (6) @(posedge clk); #1;
      // reversed
      make_msg(3, t % 4, t, a1, a2);
      send(a2, 0); send(a1, 1);
      repeat (6) @(posedge clk); #1;
      // interleaved: A1 B2 A2 B1 -> A completes first, then B
      make_msg(0, 0, t, a1, a2);
      make_msg(2, 3, t + 1, b1, b2);
      lat_on = 0;
      send(a1, 0); send(b2, 0); send(a2, 1); send(b1, 0);
      repeat (12) @(posedge clk); #1;
      lat_on = 1;
    end
    // core backpressure
    bp_on = 1;
    lat_on = 0;
    for (int t = 0; t < 10; t++) begin
      make_msg(1, 2, t, a1, a2);
      send(a1, 0); send(a2, 0);
    end
    repeat (100) @(posedge clk);
    check(delivered == 50, $sformatf("50 messages delivered (%0d)", delivered));
    check(ooo >= 20, $sformatf("out-of-order arrivals seen (%0d)", ooo));
    check(stalls > 0, "backpressure reached the network side");
    $display("delivered=%0d ooo=%0d stalls=%0d", delivered, ooo, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
