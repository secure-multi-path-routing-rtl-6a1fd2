// tb_aont_pkg -- checks the package's modular arithmetic against plain % arithmetic.
//
// For n = 2, 4, 16 and 256 every pair of symbol codes is multiplied with
// gf_mul and compared with (a * b) mod p; every code is inverted with gf_inv
// and the product with the original checked to be 1.
module tb_aont_pkg;
  import aont_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    int ws[4] = '{1, 2, 4, 8};
    foreach (ws[t]) begin
      int w, n, p, exp_v;
      w = ws[t]; n = 1 << w; p = n + 1;
      for (int a = 0; a < n; a++) begin
        for (int b = 0; b < n; b++) begin
          exp_v = (((a == 0) ? n : a) * ((b == 0) ? n : b)) % p % n;
          checks++;
          if (int'(gf_mul(W_MAX'(a), W_MAX'(b), w)) != exp_v) begin
            failures++;
            if (failures < 10) $display("FAIL gf_mul w=%0d %0d*%0d got %0d exp %0d", w, a, b, gf_mul(W_MAX'(a), W_MAX'(b), w), exp_v);
          end
        end
        checks++;
        exp_v = (((a == 0) ? n : a) * ((int'(gf_inv(W_MAX'(a), w)) == 0) ? n : int'(gf_inv(W_MAX'(a), w)))) % p;
        if (exp_v != 1) begin
          failures++;
          if (failures < 10) $display("FAIL gf_inv w=%0d a=%0d", w, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
