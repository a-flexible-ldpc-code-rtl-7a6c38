// tb_compare_unit: exhaustive over L(q_mj) and the sign, random minima.
// R_mj(new) = s * floor(A*111/128) with A = min2 when |L(q_mj)| == min1,
// else min1, and L(q_j)(new) = sat(L(q_mj) + R_mj(new)) within +-127.
`timescale 1ns/1ps
module tb_compare_unit;
  import ldpc_pkg::*;
  logic signed [QW-1:0] lq_mj, r_new, lq_new;
  logic [QW-2:0] min1, min2;
  logic sign_all;
  int checks = 0, failures = 0;

  compare_unit dut (.*);

  initial begin
    for (int v = -127; v <= 127; v++) begin
      for (int rep = 0; rep < 8; rep++) begin
        int a1, a2, mag, A, sc, s, r, n;
        mag = v < 0 ? -v : v;
        a1 = (rep == 0) ? mag : int'($urandom % 128);
        a2 = a1 + int'($urandom % (128 - a1));
        lq_mj = QW'(v); min1 = 7'(a1); min2 = 7'(a2); sign_all = rep[0];
        #1;
        A = (mag != a1) ? a1 : a2;
        sc = (A * 111) / 128;
        s = rep[0] ^ (v < 0);
        r = s ? -sc : sc;
        n = v + r;
        if (n > 127) n = 127;
        if (n < -127) n = -127;
        checks++;
        if (r_new != QW'(r) || lq_new != QW'(n)) begin
          failures++;
          if (failures < 10) $display("v=%0d m1=%0d m2=%0d s=%0d: got %0d/%0d expected %0d/%0d",
                                      v, a1, a2, rep[0], r_new, lq_new, r, n);
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
