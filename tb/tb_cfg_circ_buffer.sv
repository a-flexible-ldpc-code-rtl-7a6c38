// tb_cfg_circ_buffer: the upload and code-switch sequence of the paper on
// a 767-word buffer. Code 1 (k1 words) is written while idle and switched in;
// while it runs, code 2 (k2 words) is written behind it from WRP = EOF+1
// (phase 1) and switched in at an iteration boundary. The test checks every
// word read in every cycle, iteration boundaries every k cycles, the SOF/EOF
// values (SOF2 = EOF1+1, EOF2 = SOF2+k2-1 mod B) and a wrap past the end of
// the buffer.
// Finally code 5, too long to fit beside the running code (k2 > B - k1), is
// uploaded in the three phases of the on-the-fly scheme, as one node of a
// five-node row sees them: phase 1 fills the B - k1 free words while code 4
// runs; phase 2 writes k1/5 more words into locations that code 4's last
// iteration has already read; the switch follows at that iteration's end;
// phase 3 writes the remaining words during code 5's first iteration, each
// before the read pointer reaches it. Every word of both codes read in those
// iterations is checked, so a write that lands on a word still to be read,
// or one that comes too late, is caught.
`timescale 1ns/1ps
module tb_cfg_circ_buffer;
  localparam int W = 15, D = 767, AW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0, upload_start = 0, wr_en = 0, switch_req = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [AW-1:0] switch_len = '0, rdp, sof, eof, wrp;
  logic iter_last, switch_pending;
  int checks = 0, failures = 0;
  int cur_base, cur_k, cur_code;   // expected live region
  int cyc_in_iter;
  int n_wrap = 0;

  cfg_circ_buffer #(.WIDTH(W), .DEPTH(D), .AW(AW)) dut (.*);

  function automatic logic [W-1:0] word(int code, int i);
    return W'(code * 1000 + i * 7 + 3);
  endfunction

  task automatic write_code(int code, int k);
    @(negedge clk) upload_start = 1;
    @(negedge clk) upload_start = 0;
    for (int i = 0; i < k; i++) begin
      wr_en = 1; wr_data = word(code, i);
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  // read checker
  always @(negedge clk) if (rst_n && run) begin
    checks++;
    if (rd_data != word(cur_code, cyc_in_iter) || iter_last != (cyc_in_iter == cur_k - 1) ||
        rdp != AW'((cur_base + cyc_in_iter) % D)) begin
      failures++;
      if (failures < 10) $display("t=%0t code %0d cycle %0d: rdp %0d data %0d last %0d base %0d k %0d sof %0d eof %0d", $time, cur_code, cyc_in_iter, rdp, rd_data, iter_last, cur_base, cur_k, sof, eof);
    end
  end
  always @(posedge clk) if (rst_n && run) begin
    if (cyc_in_iter == cur_k - 1) begin
      cyc_in_iter <= 0;
      if (switch_pending) begin cur_code <= cur_code + 1; cur_k <= int'(switch_len); cur_base <= (cur_base + cur_k) % D; end
    end else cyc_in_iter <= cyc_in_iter + 1;
  end

  task automatic write_range(int code, int w0, int w1);
    for (int i = w0; i < w1; i++) begin
      wr_en = 1; wr_data = word(code, i);
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  task automatic expect_region(int base, int k);
    checks++;
    if (sof != AW'(base % D) || eof != AW'((base + k - 1) % D)) begin
      failures++; $display("SOF %0d EOF %0d expected %0d %0d", sof, eof, base % D, (base + k - 1) % D);
    end
  endtask

  initial begin
    int k[5];
    int base;
    k = '{300, 280, 250, 200, 310};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // code 0 while idle
    write_code(0, k[0]);
    @(negedge clk) switch_req = 1; switch_len = AW'(k[0]);
    @(negedge clk) switch_req = 0;
    @(negedge clk);
    expect_region(0, k[0]);
    cur_code = 0; cur_k = k[0]; cur_base = 0; cyc_in_iter = 0; base = 0;
    run = 1;
    // codes 1..4 uploaded behind the running one, switched at iteration ends
    for (int c = 1; c < 5; c++) begin
      write_code(c, k[c]);
      checks++;
      if (wrp != AW'((base + k[c-1] + k[c]) % D)) begin failures++; $display("WRP %0d", wrp); end
      switch_req = 1; switch_len = AW'(k[c]);
      @(negedge clk) switch_req = 0;
      wait (!switch_pending);
      @(negedge clk);
      base = (base + k[c-1]) % D;
      expect_region(base, k[c]);
      if (eof < sof) n_wrap++;
      repeat (k[c] + 10) @(negedge clk);
    end
    // code 5 in three phases
    begin
      int k1, k2, p1, p2;
      k1 = k[4]; k2 = 600;
      p1 = D - k1;            // phase 1: free locations
      p2 = p1 + k1 / 5;       // phase 2: k1/n words in C1's last iteration
      @(negedge clk) upload_start = 1;
      @(negedge clk) upload_start = 0;
      write_range(5, 0, p1);
      wait (cyc_in_iter == 0);
      @(negedge clk);
      // this iteration of code 4 is its last
      switch_req = 1; switch_len = AW'(k2);
      @(negedge clk) switch_req = 0;
      wait (cyc_in_iter == 100);
      @(negedge clk);
      write_range(5, p1, p2);   // word w lands where code 4 read cycle w - p1 (< 100)
      checks++;
      if (cur_code != 4) begin failures++; $display("phase 2 did not end inside the last iteration"); end
      wait (cur_code == 5);
      @(negedge clk);
      base = (base + k1) % D;
      expect_region(base, k2);
      write_range(5, p2, k2);   // word w is read in cycle w, after this write
      repeat (2 * k2) @(negedge clk);
      checks++;
      if (cur_code != 5 || wrp != AW'((base + k2) % D)) begin
        failures++; $display("phase 3: code %0d WRP %0d", cur_code, wrp);
      end
    end
    run = 0;
    // one of the regions wrapped past the end of the buffer
    checks++;
    if (n_wrap == 0) begin failures++; $display("no region wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
