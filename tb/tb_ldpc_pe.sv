// tb_ldpc_pe: one processing element, driven like the NoC would drive it.
// Frame 1, iteration 1: the L(q_j) memory is loaded through the LLR port for
// 12 checks of random degree (1..20) in random blocks, and the checks are
// started back to back or with gaps by CNT/CMP words; R_mj(old) must read as
// 0. Iteration 2: new L(q_j) values arrive on the router port at the WAG
// addresses, and the R_mj values written in iteration 1 must be used. A new
// frame (frame_start) then clears R again. Every output value is compared
// with a layered normalized min-sum model, and its cycle with the pipeline
// timing: outputs of a check started in cycle t leave in t+d+3 .. t+2d+2,
// or right after the previous check's outputs if those are later.
`timescale 1ns/1ps
module tb_ldpc_pe;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0, frame_start = 0;
  logic [CNT_W-1:0] cnt_word = '0;
  logic [MEM_AW-1:0] wag_addr = '0, llr_addr = '0;
  logic in_valid = 0, llr_we = 0;
  logic [QW-1:0] in_data = '0, llr_data = '0;
  logic out_valid;
  logic [QW-1:0] out_data;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ldpc_pe dut (.*);

  localparam int NCHK = 12;
  int deg[NCHK], blk[NCHK];
  int lq[MEM_DEPTH], rr[MEM_DEPTH];
  int exp_v[$], exp_t[$];
  int n_wait = 0;

  function automatic int satq(int v);
    return v > 127 ? 127 : (v < -127 ? -127 : v);
  endfunction

  // model of one check: pushes its outputs and their cycles
  function automatic int model_check(int c, int t, int cmp_free);
    int x[ND];
    int m1, m2, sg, cs;
    m1 = 127; m2 = 127; sg = 0;
    for (int k = 0; k < deg[c]; k++) begin
      int a;
      x[k] = satq(lq[blk[c] * ND + k] - rr[blk[c] * ND + k]);
      a = x[k] < 0 ? -x[k] : x[k];
      if (a < m1) begin m2 = m1; m1 = a; end else if (a < m2) m2 = a;
      sg ^= (x[k] < 0);
    end
    cs = t + deg[c] + 2;
    if (cmp_free > cs) begin cs = cmp_free; n_wait++; end
    for (int k = 0; k < deg[c]; k++) begin
      int mag, A, sc, s, r;
      mag = x[k] < 0 ? -x[k] : x[k];
      A = (mag != m1) ? m1 : m2;
      sc = (A * ALPHA_INV_Q7) >> 7;
      s = sg ^ (x[k] < 0);
      r = s ? -sc : sc;
      rr[blk[c] * ND + k] = r;
      exp_v.push_back(satq(x[k] + r));
      exp_t.push_back(cs + 1 + k);
    end
    return cs + deg[c];
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_v.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      if (out_data != QW'(exp_v[0]) || cyc != exp_t[0]) begin
        failures++;
        if (failures < 10) $display("output %0d at %0d, expected %0d at %0d", $signed(out_data), cyc, exp_v[0], exp_t[0]);
      end
      void'(exp_v.pop_front()); void'(exp_t.pop_front());
    end
  end

  task automatic run_iteration();
    int cmp_free;
    cmp_free = 0;
    for (int c = 0; c < NCHK; c++) begin
      @(negedge clk);
      cnt_word = {DEG_W'(deg[c]), BLK_W'(blk[c])};
      cmp_free = model_check(c, cyc, cmp_free);
      @(negedge clk);
      cnt_word = '0;
      repeat (deg[c] - 2 + ((c % 4 == 3) ? 3 : 0)) @(negedge clk);
    end
    repeat (60) @(negedge clk);
    checks++;
    if (exp_v.size() != 0) begin failures++; $display("%0d outputs missing", exp_v.size()); end
  endtask

  initial begin
    for (int i = 0; i < MEM_DEPTH; i++) begin lq[i] = 0; rr[i] = 0; end
    for (int c = 0; c < NCHK; c++) begin
      deg[c] = (c == 0) ? ND : ((c == 1) ? 2 : 2 + int'($urandom % (ND - 1)));
      blk[c] = (c * 13 + 5) % NPC;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      // channel LLRs through the load port
      for (int c = 0; c < NCHK; c++)
        for (int k = 0; k < deg[c]; k++) begin
          @(negedge clk);
          llr_we = 1; llr_addr = MEM_AW'(blk[c] * ND + k);
          lq[blk[c] * ND + k] = int'($urandom % 41) - 14;
          llr_data = QW'(lq[blk[c] * ND + k]);
        end
      @(negedge clk) llr_we = 0;
      for (int i = 0; i < MEM_DEPTH; i++) rr[i] = 0;
      run = 1; frame_start = 1;
      @(negedge clk) frame_start = 0;
      run_iteration();
      // iteration 2: new values arrive from the router at WAG addresses
      for (int c = 0; c < NCHK; c++)
        for (int k = deg[c] - 1; k >= 0; k--) begin
          @(negedge clk);
          in_valid = 1; wag_addr = MEM_AW'(blk[c] * ND + k);
          lq[blk[c] * ND + k] = satq(lq[blk[c] * ND + k] + int'($urandom % 21) - 10);
          in_data = QW'(lq[blk[c] * ND + k]);
        end
      @(negedge clk) in_valid = 0;
      run_iteration();
      run = 0;
    end
    checks++;
    if (n_wait == 0) begin failures++; $display("compare stage never busy"); end
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
