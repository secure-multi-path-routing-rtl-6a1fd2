// tb_aont_enc -- checks the AONT against the reference model, with latency.
//
// Two configurations: n = 4, s = 64 (the design default, a 512-bit message)
// and n = 16, s = 8.  Each trial draws a random message and a random key
// permutation, pulses `start`, requires `done` exactly 2 clocks later and
// compares all s+1 pseudo-blocks with the reference transform.  The reference
// inverse must also return the message from the RTL's output.
module tb_aont_enc;
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
    logic [S*N*W-1:0]     msg;
    logic [W-1:0]         key [N];
    logic                 done;
    logic [(S+1)*N*W-1:0] pseudo;

    aont_enc #(.N(N), .S(S)) dut (.clk, .rst_n, .start, .msg, .key, .done, .pseudo);

    initial begin
      int m[], k[], ps[], m2[], k2[];
      int lat;
      start = 0; msg = '0;
      for (int j = 0; j < N; j++) key[j] = '0;
      wait (rst_n);
      @(posedge clk);
      for (int t = 0; t < 30; t++) begin
        m = new[S*N];
        foreach (m[e]) begin m[e] = $urandom_range(N-1, 0); msg[e*W +: W] = W'(m[e]); end
        random_key(N, k);
        for (int j = 0; j < N; j++) key[j] = W'(k[j]);
        encode(m, k, N, S, ps);
        #1 start = 1;
        @(posedge clk); #1 start = 0;
        lat = 1;
        while (!done && lat < 20) begin @(posedge clk); #1 lat++; end
        check(lat == 2, $sformatf("n=%0d latency %0d, expected 2", N, lat));
        for (int e = 0; e < (S+1)*N; e++)
          check(int'(pseudo[e*W +: W]) == ps[e], $sformatf("n=%0d trial %0d element %0d", N, t, e));
        for (int e = 0; e < (S+1)*N; e++) ps[e] = int'(pseudo[e*W +: W]);
        decode(ps, N, S, m2, k2);
        check(m2 == m, "reference inverse recovers the message from the RTL output");
        check(k2 == k, "reference inverse recovers the key from the RTL output");
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
