// tb_aont_dec -- checks the inverse AONT against the reference model, with latency.
//
// Configurations n = 4, s = 64 and n = 16, s = 8.  Each trial encodes a random
// message with the reference transform and a random key, pulses `start` with
// the s+1 pseudo-blocks, requires `done` exactly 3 clocks later and the
// original message on `msg`.  A second pass alters one element of the last
// pseudo-block (the hidden key) and requires that the message is no longer
// recovered: one missing or wrong block must spoil the whole message.
module tb_aont_dec;
  import aont_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  bit fin [2];
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int N = (g == 0) ? 4 : 16;
    localparam int S = (g == 0) ? 64 : 8;
    localparam int W = $clog2(N);
    logic                 start;
    logic [(S+1)*N*W-1:0] pseudo;
    logic                 done;
    logic [S*N*W-1:0]     msg;

    aont_dec #(.N(N), .S(S)) dut (.clk, .rst_n, .start, .pseudo, .done, .msg);

    initial begin
      int m[], k[], ps[];
      int lat, same, e;
      start = 0; pseudo = '0;
      wait (rst_n);
      @(posedge clk);
      for (int t = 0; t < 40; t++) begin
        m = new[S*N];
        foreach (m[i]) m[i] = $urandom_range(N-1, 0);
        random_key(N, k);
        encode(m, k, N, S, ps);
        if (t >= 20) begin
          // tamper: change one element of B'_(s+1)
          e = S*N + $urandom_range(N-1, 0);
          ps[e] = (ps[e] + 1 + $urandom_range(N-3, 0)) % N;
          if (ps[e] == 0 && N == 2) ps[e] = 1;
        end
        foreach (ps[i]) pseudo[i*W +: W] = W'(ps[i]);
        #1 start = 1;
        @(posedge clk); #1 start = 0;
        lat = 1;
        while (!done && lat < 20) begin @(posedge clk); #1 lat++; end
        check(lat == 3, $sformatf("n=%0d latency %0d, expected 3", N, lat));
        same = 1;
        foreach (m[i]) if (int'(msg[i*W +: W]) != m[i]) same = 0;
        if (t < 20) begin
          foreach (m[i]) check(int'(msg[i*W +: W]) == m[i], $sformatf("n=%0d trial %0d element %0d", N, t, i));
        end else        check(same == 0, $sformatf("n=%0d trial %0d tampered key block must not decode", N, t));
        @(posedge clk);
      end
      fin[g] = 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1]);
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
