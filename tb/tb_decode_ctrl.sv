// tb_decode_ctrl: iteration boundaries every K cycles (as the configuration
// buffers report them); a start must give exactly it_max*K cycles of run,
// one frame_start pulse at the beginning and one done pulse at the end,
// for several it_max values.
`timescale 1ns/1ps
module tb_decode_ctrl;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, iter_last, run, frame_start, done;
  logic [ITER_W-1:0] it_max = '0, iter;
  int checks = 0, failures = 0;
  int K, pos = 0, runc = 0, fsc = 0, donec = 0;

  decode_ctrl dut (.*);

  assign iter_last = run && (pos == K - 1);
  always @(posedge clk) begin
    if (run) pos <= (pos == K - 1) ? 0 : pos + 1; else pos <= 0;
    if (run) runc <= runc + 1;
    if (frame_start) fsc <= fsc + 1;
    if (done) donec <= donec + 1;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      K = 5 + f * 3;
      it_max = ITER_W'(1 + (f * 5) % 15);
      runc = 0; fsc = 0; donec = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      wait (done);
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (runc != K * int'(it_max) || fsc != 1 || donec != 1 || iter != it_max) begin
        failures++;
        $display("K=%0d it_max=%0d: run %0d cycles, %0d frame_start, %0d done, iter %0d",
                 K, it_max, runc, fsc, donec, iter);
      end
    end
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
