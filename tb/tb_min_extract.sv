// tb_min_extract: random checks of degree 1..20 fed one value per cycle;
// on the last value min1, min2 and the sign XOR must equal the values
// computed directly from the list.
`timescale 1ns/1ps
module tb_min_extract;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic signed [QW-1:0] in_data = '0;
  logic res_valid, res_sign;
  logic [QW-2:0] res_min1, res_min2;
  int checks = 0, failures = 0;

  min_extract dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int d, m1, m2, sg, v, a;
      d = 1 + int'($urandom % ND);
      m1 = 127; m2 = 127; sg = 0;
      for (int k = 0; k < d; k++) begin
        v = int'($urandom % 255) - 127;
        if (n % 7 == 0) v = (k % 2) ? 5 : -5;      // equal minima
        a = v < 0 ? -v : v;
        if (a < m1) begin m2 = m1; m1 = a; end else if (a < m2) m2 = a;
        sg ^= (v < 0);
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_last = (k == d - 1); in_data = QW'(v);
        #1;
        checks++;
        if (res_valid != (k == d - 1)) begin failures++; $display("res_valid wrong"); end
        if (k == d - 1) begin
          checks++;
          if (res_min1 != 7'(m1) || res_min2 != 7'(m2) || res_sign != sg[0]) begin
            failures++;
            $display("d=%0d got %0d/%0d/%0d expected %0d/%0d/%0d", d, res_min1, res_min2, res_sign, m1, m2, sg);
          end
        end
      end
      // idle gap now and then
      if (n % 3 == 0) begin @(negedge clk); in_valid = 0; in_first = 0; in_last = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
