// tb_dp_ram: random writes and reads of the 940-word extrinsic memory
// against an array model. Read data must appear one cycle after the address
// and a read of the address being written returns the old word.
`timescale 1ns/1ps
module tb_dp_ram;
  localparam int W = 8, D = 940, AW = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model[D];
  int checks = 0, failures = 0;

  dp_ram #(.WIDTH(W), .DEPTH(D), .AW(AW)) dut (.*);

  initial begin
    logic [W-1:0] exp;
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      re = 1; raddr = AW'($urandom % D);
      we = ($urandom % 2) == 1;
      waddr = (i % 5 == 0) ? raddr : AW'($urandom % D);
      wdata = W'($urandom);
      exp = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != exp) begin
        failures++;
        if (failures < 10) $display("addr %0d read %h expected %h", raddr, rdata, exp);
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
