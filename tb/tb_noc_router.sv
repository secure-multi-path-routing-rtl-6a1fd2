// tb_noc_router -- checks routing, pivot swap, VC choice, latency and backpressure.
//
// One router at (1, 1) of a 4 x 4 mesh, 16-bit payloads, 2-packet buffers.
//  1. 200 single packets with random headers enter on random ports / VCs.
//     Each must leave exactly one cycle later on the port given by a
//     reference XY / YX routing function, after the reference pivot swap
//     (target := fin_id, phase2 := 1, YX -> XY when flip_route), on the VC
//     of its resulting mode, with its payload unchanged.
//  2. Backpressure: with the east output blocked, packets for the east are
//     accepted until the 2-entry buffer is full (in_ready drops), none leave,
//     and after release all leave in order.
//  3. Contention: two inputs aimed at one output both get through, one per
//     cycle, alternating between the inputs.
module tb_noc_router;
  import aont_pkg::*;
  localparam int PW = 16;
  localparam int MX = 1, MY = 1;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hdr_t          in_hdr [NPORTS], out_hdr [NPORTS];
  logic [PW-1:0] in_pay [NPORTS], out_pay [NPORTS];
  logic [1:0]    in_valid [NPORTS], in_ready [NPORTS], out_valid [NPORTS], out_ready [NPORTS];
  logic          swap_evt;
  int            swaps = 0;

  noc_router #(.PAY_W(PW), .DEPTH(2), .MY_X(MX), .MY_Y(MY)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int ref_port(hdr_t h);
    int dx, dy;
    dx = int'(h.dst_x); dy = int'(h.dst_y);
    if (h.mode == MODE_XY) begin
      if (dx != MX) return (dx > MX) ? 1 : 3;
      if (dy != MY) return (dy > MY) ? 2 : 0;
    end else begin
      if (dy != MY) return (dy > MY) ? 2 : 0;
      if (dx != MX) return (dx > MX) ? 1 : 3;
    end
    return 4;
  endfunction

  function automatic hdr_t ref_swap(hdr_t h);
    if (!h.phase2 && int'(h.dst_x) == MX && int'(h.dst_y) == MY) begin
      h.dst_x = h.fin_x; h.dst_y = h.fin_y; h.phase2 = 1;
      if (h.flip) h.mode = MODE_XY;
    end
    return h;
  endfunction

  function automatic hdr_t rand_hdr();
    hdr_t h;
    h = hdr_t'($urandom());
    h.dst_x = COORD_W'($urandom_range(2, 0)); h.dst_y = COORD_W'($urandom_range(2, 0));
    h.fin_x = COORD_W'($urandom_range(3, 0)); h.fin_y = COORD_W'($urandom_range(3, 0));
    return h;
  endfunction

  always @(posedge clk) if (swap_evt) swaps++;

  // log of east-port VC0 departures during the contention test
  logic [15:0] e_log [$];
  bit          log_on = 0;
  always @(posedge clk)
    if (log_on && out_valid[PORT_E][0] && out_ready[PORT_E][0]) e_log.push_back(out_pay[PORT_E]);

  task automatic idle_inputs();
    for (int p = 0; p < NPORTS; p++) begin in_valid[p] = '0; in_hdr[p] = '0; in_pay[p] = '0; end
  endtask

  initial begin
    hdr_t h, e;
    int p, v, op, ev, lat, seen;
    logic [PW-1:0] pay;
    idle_inputs();
    for (int q = 0; q < NPORTS; q++) out_ready[q] = 2'b11;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- 1. single packets
    for (int t = 0; t < 200; t++) begin
      h = rand_hdr();
      p = $urandom_range(4, 0);
      v = h.mode;
      pay = PW'($urandom());
      e  = ref_swap(h);
      op = ref_port(e);
      ev = e.mode;
      @(negedge clk);
      in_hdr[p] = h; in_pay[p] = pay; in_valid[p][v] = 1'b1;
      check(in_ready[p][v], "buffer free");
      @(negedge clk);
      idle_inputs();
      // packet written at the last edge: it must be on the output now
      seen = 0;
      for (int q = 0; q < NPORTS; q++)
        for (int c = 0; c < 2; c++)
          if (out_valid[q][c]) begin
            seen++;
            check(q == op, $sformatf("packet %0d leaves on port %0d, expected %0d", t, q, op));
            check(c == ev, $sformatf("packet %0d leaves on VC %0d, expected %0d", t, c, ev));
            check(out_hdr[q] == e, $sformatf("packet %0d header", t));
            check(out_pay[q] == pay, $sformatf("packet %0d payload", t));
          end
      check(seen == 1, $sformatf("packet %0d: one cycle per hop, %0d outputs seen", t, seen));
    end
    check(swaps > 0, "pivot swaps happened");
    // ---- 2. backpressure on the east output, VC 0
    @(negedge clk);
    out_ready[PORT_E] = 2'b00;
    h = '0; h.dst_x = 3; h.dst_y = 1; h.fin_x = 3; h.fin_y = 1; h.phase2 = 1; h.mode = MODE_XY;
    for (int k = 0; k < 2; k++) begin
      @(negedge clk);
      check(in_ready[PORT_W][0], "accepts while buffer has room");
      in_hdr[PORT_W] = h; in_pay[PORT_W] = PW'(k); in_valid[PORT_W] = 2'b01;
    end
    @(negedge clk);
    idle_inputs();
    check(!in_ready[PORT_W][0], "in_ready low when the 2-entry buffer is full");
    check(out_valid[PORT_E] == 2'b00, "nothing leaves while blocked");
    repeat (3) @(negedge clk);
    check(out_valid[PORT_E] == 2'b00, "still blocked");
    out_ready[PORT_E] = 2'b11;
    #1;
    for (int k = 0; k < 2; k++) begin
      check(out_valid[PORT_E][0] && out_pay[PORT_E] == PW'(k), $sformatf("blocked packet %0d released in order", k));
      @(negedge clk);
    end
    // ---- 3. contention: N and S inputs both to the east, 2 packets each
    lat = 0;
    log_on = 1;
    for (int k = 0; k < 2; k++) begin
      @(negedge clk);
      in_hdr[PORT_N] = h; in_pay[PORT_N] = PW'(16'hA000 + k); in_valid[PORT_N] = 2'b01;
      in_hdr[PORT_S] = h; in_pay[PORT_S] = PW'(16'hB000 + k); in_valid[PORT_S] = 2'b01;
    end
    @(negedge clk);
    idle_inputs();
    repeat (8) @(negedge clk);
    seen = e_log.size();
    for (int k = 1; k < e_log.size(); k++)
      check(e_log[k][15:12] != e_log[k-1][15:12], "round-robin alternates inputs");
    check(seen == 4, $sformatf("all 4 contending packets delivered (%0d)", seen));
    $display("swaps=%0d", swaps);
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
