// tb_cnt_cmp: random sequences of check start words, back to back or with
// gaps. A start word {deg, blk} in cycle t must give reads of addresses
// blk*20 .. blk*20+deg-1 in cycles t+1 .. t+deg, first and last flagged.
`timescale 1ns/1ps
module tb_cnt_cmp;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0;
  logic [CNT_W-1:0] cfg_word = '0;
  logic rd_valid, rd_first, rd_last;
  logic [MEM_AW-1:0] rd_addr;
  int checks = 0, failures = 0;
  int exp_addr[$], exp_first[$], exp_last[$];
  int cyc = 0, n_b2b = 0;

  cnt_cmp dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  // checker: at every falling edge the read port must show the entry
  // stamped with the current cycle number, or be idle
  int exp_cyc[$];
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (exp_cyc.size() > 0 && exp_cyc[0] == cyc) begin
      if (!rd_valid || rd_addr != MEM_AW'(exp_addr[0]) || rd_first != exp_first[0][0] || rd_last != exp_last[0][0]) begin
        failures++;
        if (failures < 10) $display("cycle %0d: valid %0d addr %0d f %0d l %0d expected addr %0d f %0d l %0d",
          cyc, rd_valid, rd_addr, rd_first, rd_last, exp_addr[0], exp_first[0], exp_last[0]);
      end
      void'(exp_cyc.pop_front());
      void'(exp_addr.pop_front()); void'(exp_first.pop_front()); void'(exp_last.pop_front());
    end else if (rd_valid) begin
      failures++; $display("unexpected read at %0d", cyc);
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1; run = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      int d, b, gap;
      d = 1 + int'($urandom % ND);
      b = int'($urandom % NPC);
      gap = (n % 3 == 0) ? int'($urandom % 4) : 0;
      if (gap == 0 && n > 0) n_b2b++;
      // start word in this cycle; reads begin next cycle
      cfg_word = {DEG_W'(d), BLK_W'(b)};
      for (int k = 0; k < d; k++) begin
        exp_cyc.push_back(cyc + 1 + k);
        exp_addr.push_back(b * ND + k); exp_first.push_back(k == 0); exp_last.push_back(k == d - 1);
      end
      @(negedge clk);
      cfg_word = '0;
      // wait until the last read cycle, then gap idle cycles
      repeat (d - 1) @(negedge clk);
      repeat (gap) @(negedge clk);
    end
    repeat (25) @(negedge clk);
    checks++;
    if (exp_addr.size() != 0 || n_b2b == 0) begin failures++; $display("leftover %0d", exp_addr.size()); end
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
