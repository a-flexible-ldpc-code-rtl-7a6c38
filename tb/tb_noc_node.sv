// tb_noc_node: one node configured over its row bus and run for three
// iterations of a hand-made 40-cycle schedule:
//   - four values enter from the west and are routed to the local PE, which
//     stores them at the WAG addresses of block 3;
//   - six values enter from the north and pass straight through to the south;
//   - a CNT/CMP word starts the degree-4 check of block 3 in cycle 7, and the
//     four updated values leave the PE and are routed out to the east.
// The bus also carries words for another node, which must be ignored. The
// test checks every south and east output (value and cycle), the iteration
// boundary every 40 cycles, and the check results against the min-sum model
// (R_mj(old) = 0 in the first iteration, the stored R_mj afterwards).
`timescale 1ns/1ps
module tb_noc_node;
  import ldpc_pkg::*;
  localparam int K = 40, D = 4, BLK = 3, MY = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0, frame_start = 0, upload_start = 0, switch_req = 0;
  cfg_bus_t bus;
  logic [CB_AW-1:0] switch_len = '0;
  logic iter_last;
  logic link_in_valid[4], link_out_valid[4];
  logic [QW-1:0] link_in_data[4], link_out_data[4];
  logic llr_we = 0;
  logic [MEM_AW-1:0] llr_addr = '0;
  logic [QW-1:0] llr_data = '0;
  logic soft_valid;
  logic [QW-1:0] soft_data;
  logic [$clog2(FIFO_LEN+1)-1:0] fifo_count[NPORT];
  int checks = 0, failures = 0;

  noc_node #(.NODE_ID(ID_W'(MY))) dut (.*);

  int rm[K], wag[K], cnt[K];
  int wv[D], nv[6], rr[D];
  int exp_s[$], exp_st[$], exp_e[$], exp_et[$];
  int t = -1;          // cycle within the iteration
  int iters = 0;

  function automatic int satq(int v);
    return v > 127 ? 127 : (v < -127 ? -127 : v);
  endfunction

  function automatic int rmw(int out, int in);
    return (32'h7fff & ~(7 << (3 * out))) | (in << (3 * out));
  endfunction

  initial begin
    for (int c = 0; c < K; c++) begin rm[c] = 32'h7fff; wag[c] = 0; cnt[c] = 0; end
    for (int k = 0; k < D; k++) begin rm[k + 1] &= rmw(P_LOCAL, P_WEST); wag[k + 2] = BLK * ND + k; end
    for (int k = 0; k < 6; k++) rm[k + 1] &= rmw(P_SOUTH, P_NORTH);
    cnt[7] = (D << BLK_W) | BLK;
    for (int k = 0; k < D; k++) rm[15 + k] &= rmw(P_EAST, P_LOCAL);
    for (int p = 0; p < 4; p++) begin link_in_valid[p] = 0; link_in_data[p] = '0; end
    for (int k = 0; k < D; k++) rr[k] = 0;
    bus = '{node_id: ID_IDLE, default: '0};
  end

  // iteration cycle counter and stimulus, aligned with the read pointer
  always @(negedge clk) begin
    if (run) begin
      for (int p = 0; p < 4; p++) link_in_valid[p] = 0;
      if (t >= 0 && t < D) begin
        link_in_valid[P_WEST] = 1; link_in_data[P_WEST] = QW'(wv[t]);
      end
      if (t >= 0 && t < 6) begin
        link_in_valid[P_NORTH] = 1; link_in_data[P_NORTH] = QW'(nv[t]);
      end
    end
  end

  // output checks
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    if (link_out_valid[P_SOUTH]) begin
      checks++;
      if (exp_s.size() == 0 || link_out_data[P_SOUTH] != QW'(exp_s[0]) || cyc != exp_st[0]) begin
        failures++; $display("south output %0d at %0d", $signed(link_out_data[P_SOUTH]), cyc);
      end
      if (exp_s.size() > 0) begin void'(exp_s.pop_front()); void'(exp_st.pop_front()); end
    end
    if (link_out_valid[P_EAST]) begin
      checks++;
      if (exp_e.size() == 0 || link_out_data[P_EAST] != QW'(exp_e[0]) || cyc != exp_et[0]) begin
        failures++;
        $display("east output %0d at %0d, expected %0d at %0d", $signed(link_out_data[P_EAST]), cyc,
                 exp_e.size() ? exp_e[0] : 0, exp_e.size() ? exp_et[0] : 0);
      end
      if (exp_e.size() > 0) begin void'(exp_e.pop_front()); void'(exp_et.pop_front()); end
    end
    if (link_out_valid[P_NORTH] || link_out_valid[P_WEST]) begin
      checks++; failures++; $display("output on an unused port");
    end
  end

  task automatic model_iteration(int c0);
    int x[D];
    int m1, m2, sg;
    m1 = 127; m2 = 127; sg = 0;
    for (int k = 0; k < D; k++) begin
      int a;
      x[k] = satq(wv[k] - rr[k]);
      a = x[k] < 0 ? -x[k] : x[k];
      if (a < m1) begin m2 = m1; m1 = a; end else if (a < m2) m2 = a;
      sg ^= (x[k] < 0);
    end
    for (int k = 0; k < D; k++) begin
      int mag, A, sc, s, r;
      mag = x[k] < 0 ? -x[k] : x[k];
      A = (mag != m1) ? m1 : m2;
      sc = (A * ALPHA_INV_Q7) >> 7;
      s = sg ^ (x[k] < 0);
      r = s ? -sc : sc;
      rr[k] = r;
      exp_e.push_back(satq(x[k] + r)); exp_et.push_back(c0 + 16 + k);
    end
    for (int k = 0; k < 6; k++) begin exp_s.push_back(nv[k]); exp_st.push_back(c0 + 2 + k); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // upload: words for node 1 first (ignored), then this node's schedule
    @(negedge clk) upload_start = 1;
    @(negedge clk) upload_start = 0;
    for (int w = 0; w < K; w++) begin
      bus = '{node_id: ID_W'(1), wag: '1, rm: '0, cnt: '1};
      @(negedge clk);
    end
    for (int w = 0; w < K; w++) begin
      bus = '{node_id: ID_W'(MY), wag: MEM_AW'(wag[w]), rm: RM_W'(rm[w]), cnt: CNT_W'(cnt[w])};
      @(negedge clk);
    end
    bus = '{node_id: ID_IDLE, default: '0};
    switch_req = 1; switch_len = CB_AW'(K);
    @(negedge clk) switch_req = 0;
    @(negedge clk);
    for (int it = 0; it < 3; it++) begin
      for (int k = 0; k < D; k++) wv[k] = int'($urandom % 61) - 30;
      for (int k = 0; k < 6; k++) nv[k] = int'($urandom % 255) - 127;
      if (it == 0) begin run = 1; frame_start = 1; end
      t = 0;
      model_iteration(cyc);
      for (int c = 0; c < K; c++) begin
        #1;
        checks++;
        if (iter_last != (c == K - 1)) begin failures++; $display("iter_last wrong at %0d", c); end
        @(negedge clk);
        frame_start = 0;
        t = c + 1;
      end
    end
    @(negedge clk) run = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_e.size() != 0 || exp_s.size() != 0) begin failures++; $display("outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
