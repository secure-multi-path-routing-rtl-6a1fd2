// tb_perm_gen -- checks the key generator always holds a permutation and keeps changing.
//
// For n = 4 and n = 16: after reset the key must be the identity (1..n);
// on every clock the key must be a permutation of the n symbol codes; over
// 2000 clocks n = 4 must show all 24 permutations and n = 16 must not repeat
// its key in consecutive clocks more than rarely.
module tb_perm_gen;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [1:0] k4  [4];
  logic [3:0] k16 [16];

  perm_gen #(.N(4))                   u4  (.clk(clk), .rst_n(rst_n), .key(k4));
  perm_gen #(.N(16), .SEED(32'hBEEF)) u16 (.clk(clk), .rst_n(rst_n), .key(k16));

  bit seen4 [int];
  int same16 = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [3:0] prev [16];
    repeat (2) @(posedge clk);
    #1;
    for (int j = 0; j < 4; j++)  check(k4[j]  == 2'((j + 1) % 4),  "n=4 identity after reset");
    for (int j = 0; j < 16; j++) check(k16[j] == 4'((j + 1) % 16), "n=16 identity after reset");
    rst_n = 1;
    prev = k16;
    for (int c = 0; c < 2000; c++) begin
      int code4, mask;
      @(posedge clk); #1;
      mask = 0; code4 = 0;
      for (int j = 0; j < 4; j++) begin mask |= 1 << k4[j]; code4 = code4 * 4 + k4[j]; end
      check(mask == 32'hF, "n=4 key is a permutation");
      seen4[code4] = 1;
      mask = 0;
      for (int j = 0; j < 16; j++) mask |= 1 << k16[j];
      check(mask == 32'hFFFF, "n=16 key is a permutation");
      if (k16 == prev) same16++;
      prev = k16;
    end
    check(seen4.num() == 24, $sformatf("n=4 reaches all 24 permutations (saw %0d)", seen4.num()));
    check(same16 < 200, $sformatf("n=16 key keeps changing (%0d repeats)", same16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
