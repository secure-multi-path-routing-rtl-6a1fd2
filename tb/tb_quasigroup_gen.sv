// tb_quasigroup_gen -- checks the quasigroup and dual tables built from random keys.
//
// For n = 4 and n = 16, random permutations K' are loaded; one clock later
// `valid` must be high and every entry must equal the reference a . b =
// a * k_b mod p, each row and column must be a permutation (Latin square),
// and the dual must satisfy a o (a . b) = b.
module tb_quasigroup_gen;
  import aont_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic       load;
  logic [1:0] key4 [4];
  logic [1:0] ls4 [4][4], du4 [4][4];
  logic       v4;
  logic [3:0] key16 [16];
  logic [3:0] ls16 [16][16], du16 [16][16];
  logic       v16;

  quasigroup_gen #(.N(4))  u4  (.clk, .rst_n, .load, .key(key4),  .ls(ls4),  .dual(du4),  .valid(v4));
  quasigroup_gen #(.N(16)) u16 (.clk, .rst_n, .load, .key(key16), .ls(ls16), .dual(du16), .valid(v16));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int k4[], k16[];
    load = 0;
    for (int j = 0; j < 4; j++)  key4[j]  = '0;
    for (int j = 0; j < 16; j++) key16[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!v4 && !v16, "valid low before the first load");
    for (int t = 0; t < 40; t++) begin
      random_key(4, k4);
      random_key(16, k16);
      for (int j = 0; j < 4; j++)  key4[j]  = 2'(k4[j]);
      for (int j = 0; j < 16; j++) key16[j] = 4'(k16[j]);
      load = 1;
      @(posedge clk); #1;
      load = 0;
      check(v4 && v16, "valid one clock after load");
      for (int a = 0; a < 4; a++) begin
        int rm, cm;
        rm = 0; cm = 0;
        for (int b = 0; b < 4; b++) begin
          check(int'(ls4[a][b]) == qop(a, b, k4, 4), $sformatf("n=4 ls[%0d][%0d]", a, b));
          check(int'(du4[a][ls4[a][b]]) == b, $sformatf("n=4 dual[%0d][.]", a));
          rm |= 1 << ls4[a][b]; cm |= 1 << ls4[b][a];
        end
        check(rm == 'hF && cm == 'hF, "n=4 Latin square");
      end
      for (int a = 0; a < 16; a++) begin
        int rm, cm;
        rm = 0; cm = 0;
        for (int b = 0; b < 16; b++) begin
          check(int'(ls16[a][b]) == qop(a, b, k16, 16), $sformatf("n=16 ls[%0d][%0d]", a, b));
          check(int'(du16[a][ls16[a][b]]) == b, $sformatf("n=16 dual[%0d][.]", a));
          rm |= 1 << ls16[a][b]; cm |= 1 << ls16[b][a];
        end
        check(rm == 'hFFFF && cm == 'hFFFF, "n=16 Latin square");
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
