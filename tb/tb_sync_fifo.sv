// tb_sync_fifo: random pushes and pops against a queue model, at the router
// FIFO length of 7. Checks head data, fill count, empty and full every cycle,
// and never pushes into a full queue or pops an empty one.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int W = 8, D = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int seen_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++; $display("count %0d empty %0d full %0d, model %0d", count, empty, full, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("head %h expected %h", rd_data, q[0]); end
      end
      if (q.size() == D) seen_full++;
      // next operation: bias towards filling in the first half
      push = (q.size() < D) && ($urandom % 100 < ((i % 400) < 200 ? 70 : 35));
      pop  = (q.size() > 0) && ($urandom % 100 < 50);
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
      push = 0; pop = 0;
    end
    checks++;
    if (seen_full == 0) begin failures++; $display("never full"); end
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
