// tb_noc_router: random traffic on all five inputs and random routing-memory
// words chosen, like the off-line tool does, only among FIFOs that hold a
// flit (sometimes two outputs take the same head, sometimes an output idles).
// Each output register must show, one cycle later, the head of the FIFO its
// select named, and each FIFO must keep arrival order. Fill levels must follow
// the model; the FIFOs are driven up to their full length of 7.
`timescale 1ns/1ps
module tb_noc_router;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0;
  logic [RM_W-1:0] rm_word = '1;
  logic in_valid[NPORT], out_valid[NPORT];
  logic [QW-1:0] in_data[NPORT], out_data[NPORT];
  logic [$clog2(FIFO_LEN+1)-1:0] fifo_count[NPORT];
  int checks = 0, failures = 0;
  logic [QW-1:0] q[NPORT][$];
  int exp_v[NPORT], exp_d[NPORT];
  int n_full = 0, n_multi = 0;

  noc_router dut (.*);

  initial begin
    for (int i = 0; i < NPORT; i++) begin in_valid[i] = 0; in_data[i] = '0; exp_v[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1; run = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit popm[NPORT];
      int sel[NPORT];
      // check outputs of the previous cycle's selection
      for (int p = 0; p < NPORT; p++) begin
        checks++;
        if (out_valid[p] != exp_v[p][0] || (exp_v[p] != 0 && out_data[p] != QW'(exp_d[p]))) begin
          failures++;
          if (failures < 10) $display("cycle %0d out %0d: v %0d d %0d expected v %0d d %0d",
                                      cyc, p, out_valid[p], out_data[p], exp_v[p], exp_d[p]);
        end
        checks++;
        if (fifo_count[p] != ($bits(fifo_count[p]))'(q[p].size())) begin
          failures++; $display("fifo %0d count %0d model %0d", p, fifo_count[p], q[p].size());
        end
        if (q[p].size() == FIFO_LEN) n_full++;
      end
      // new selection
      for (int i = 0; i < NPORT; i++) popm[i] = 0;
      for (int p = 0; p < NPORT; p++) begin
        int i;
        i = int'($urandom % 8);
        sel[p] = 7;
        // slow draining in the first half fills the FIFOs
        if (i < NPORT && q[i].size() > 0 && ($urandom % 100) < ((cyc % 1000) < 500 ? 25 : 90)) begin
          sel[p] = i;
          if (popm[i]) n_multi++;
          popm[i] = 1;
        end
        rm_word[p*SEL_W +: SEL_W] = SEL_W'(sel[p]);
        exp_v[p] = (sel[p] != 7);
        exp_d[p] = (sel[p] != 7) ? int'(q[sel[p]][0]) : 0;
      end
      for (int i = 0; i < NPORT; i++) begin
        in_valid[i] = (q[i].size() - int'(popm[i]) < FIFO_LEN) && ($urandom % 2 == 1);
        in_data[i] = QW'($urandom);
      end
      @(posedge clk); #1;
      for (int i = 0; i < NPORT; i++) begin
        if (popm[i]) void'(q[i].pop_front());
        if (in_valid[i]) q[i].push_back(in_data[i]);
        in_valid[i] = 0;
      end
      @(negedge clk);
    end
    checks++;
    if (n_full == 0 || n_multi == 0) begin failures++; $display("full %0d multi %0d", n_full, n_multi); end
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
