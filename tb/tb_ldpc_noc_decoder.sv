// tb_ldpc_noc_decoder: end-to-end test of the 5 x 5 NoC LDPC decoder at its
// default parameters.
//
// The testbench contains a small version of the off-line configuration flow:
// it builds two layered LDPC codes (every layer a partition of the bits into
// checks), maps the checks on the 25 PEs, and runs a cycle-accurate model of
// the NoC and PE timing to derive, for every node and every cycle of one
// iteration, the routing-memory word (XY dimension-order routing on the
// torus, shortest direction), the WAG write address of each delivered value
// and the CNT/CMP start word of each check. It then
//   1. uploads code A over the five row buses and switches to it (idle),
//   2. decodes a frame of A while uploading code B behind it, with the
//      switch requested in the last iteration so that it takes effect at
//      the frame boundary,
//   3. keeps alternating A and B frame by frame, always uploading the next
//      code behind the running one, until the circular buffers have wrapped
//      around their end.
// Every value leaving every PE is compared with a bit-accurate layered
// normalized min-sum reference model, and each frame must last exactly
// it_max * k cycles. Mechanisms that must occur at least once: a flit
// waiting in a FIFO behind another, a value routed from a PE back to itself,
// use of a torus wrap-around link, a check whose outputs wait for the
// previous check in the compare stage, an on-the-fly code switch while
// running, and a circular-buffer upload that wraps past the end.
`timescale 1ns/1ps
module tb_ldpc_noc_decoder;
  import ldpc_pkg::*;

  localparam int NN   = NOC_N;
  localparam int NP   = NN * NN;
  localparam int MAXB = 128;
  localparam int MAXC = 80;
  localparam int MAXL = 4;
  localparam int MAXD = 8;
  localparam int IT   = 10;              // It_max of the WiMAX rate-1/2 codes
  localparam int NFRAMES = 18;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start = 0;
  logic [ITER_W-1:0] it_max = ITER_W'(IT);
  logic              busy, done;
  logic [ITER_W-1:0] iter;
  cfg_bus_t          cfg_bus [NN];
  logic              cfg_upload_start = 0, cfg_switch = 0;
  logic [CB_AW-1:0]  cfg_len = '0;
  logic              llr_we = 0;
  logic [7:0]        llr_node = '0;
  logic [MEM_AW-1:0] llr_addr = '0;
  logic [QW-1:0]     llr_data = '0;
  logic              soft_valid[NP];
  logic [QW-1:0]     soft_data [NP];

  ldpc_noc_decoder dut (.*);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ code
  typedef struct {
    int nb, nl, nchk;
    int lay_first[MAXL+1];      // first check of each layer
    int lay_of  [MAXC];
    int deg     [MAXC];
    int bits  [MAXC][MAXD];     // bit of check c at position k
    int pe    [MAXC];
    int blk   [MAXC];
    int occ_c [MAXB][MAXL];     // check of bit j in layer l
    int occ_k [MAXB][MAXL];
    int k;                      // cycles per iteration
  } code_t;

  code_t codes[2];
  int rm_tab  [2][NP][CB_DEPTH];
  int wag_tab [2][NP][CB_DEPTH];
  int cnt_tab [2][NP][CB_DEPTH];

  // mechanism counters
  int n_wait = 0, n_loop = 0, n_wrap_link = 0, n_cmp_busy = 0, n_switch_run = 0, n_buf_wrap = 0;
  int max_fifo_model = 0;

  // a layered code: layer l splits the nb bits into checks whose degrees
  // alternate between dcl[l] and dcl2[l] (the last check takes what is left)
  function automatic void make_code(int id, int nb, int nl, int dcl[MAXL], int dcl2[MAXL],
                                    int pe_mul, int pe_add);
    int perm[MAXB];
    int cnt_pe[NP];
    int c;
    codes[id].nb = nb; codes[id].nl = nl;
    for (int p = 0; p < NP; p++) cnt_pe[p] = 0;
    c = 0;
    for (int l = 0; l < nl; l++) begin
      codes[id].lay_first[l] = c;
      for (int j = 0; j < nb; j++) perm[j] = j;
      if (l > 0)
        for (int j = nb - 1; j > 0; j--) begin
          int r, t;
          r = int'($urandom % (j + 1));
          t = perm[j]; perm[j] = perm[r]; perm[r] = t;
        end
      for (int i = 0, used = 0; used < nb; i++) begin
        int d;
        d = (i % 2 == 0) ? dcl[l] : dcl2[l];
        if (used + d > nb) d = nb - used;
        codes[id].deg[c] = d;
        codes[id].lay_of[c] = l;
        for (int k = 0; k < d; k++) begin
          codes[id].bits[c][k] = perm[used + k];
          codes[id].occ_c[perm[used + k]][l] = c;
          codes[id].occ_k[perm[used + k]][l] = k;
        end
        used += d;
        codes[id].pe[c]  = (l == 0) ? ((i / 2) % NP) : ((i * pe_mul + pe_add * l) % NP);
        codes[id].blk[c] = cnt_pe[codes[id].pe[c]];
        cnt_pe[codes[id].pe[c]]++;
        c++;
      end
    end
    codes[id].lay_first[nl] = c;
    codes[id].nchk = c;
  endfunction

  // ------------------------------------------------- schedule derivation
  // one message per (check, position): its value goes to the next layer's check of that bit
  localparam int QD = 4096;
  int q_msg  [NP][NPORT][$];
  int q_rdy  [NP][NPORT][$];

  function automatic int route_port(int node, int dst);
    int r, c, dr, dc, dx, dy;
    r = node / NN; c = node % NN; dr = dst / NN; dc = dst % NN;
    if (c != dc) begin
      dx = (dc - c + NN) % NN;
      return (dx <= NN / 2) ? 1 : 3;        // east : west
    end
    if (r != dr) begin
      dy = (dr - r + NN) % NN;
      return (dy <= NN / 2) ? 2 : 0;        // south : north
    end
    return 4;
  endfunction

  function automatic int neighbour(int node, int port);
    int r, c;
    r = node / NN; c = node % NN;
    case (port)
      0: return ((r + NN - 1) % NN) * NN + c;
      1: return r * NN + (c + 1) % NN;
      2: return ((r + 1) % NN) * NN + c;
      default: return r * NN + (c + NN - 1) % NN;
    endcase
  endfunction

  function automatic bit is_wrap(int node, int port);
    int r, c;
    r = node / NN; c = node % NN;
    case (port)
      0: return r == 0;
      1: return c == NN - 1;
      2: return r == NN - 1;
      default: return c == 0;
    endcase
  endfunction

  function automatic void schedule(int id);
    int pe_list[NP][$];
    int pe_next[NP], pe_free[NP], cmp_free[NP];
    int arr[MAXC][MAXD];
    int last_event, delivered, total;
    for (int p = 0; p < NP; p++) begin
      pe_list[p].delete(); pe_next[p] = 0; pe_free[p] = 0; cmp_free[p] = 0;
      for (int i = 0; i < NPORT; i++) begin q_msg[p][i].delete(); q_rdy[p][i].delete(); end
      for (int t = 0; t < CB_DEPTH; t++) begin
        rm_tab[id][p][t] = 32'h7fff; wag_tab[id][p][t] = 0; cnt_tab[id][p][t] = 0;
      end
    end
    for (int c = 0; c < codes[id].nchk; c++) begin
      pe_list[codes[id].pe[c]].push_back(c);
      for (int k = 0; k < codes[id].deg[c]; k++) arr[c][k] = (codes[id].lay_of[c] == 0) ? -1 : 1 << 30;
    end
    total = codes[id].nl * codes[id].nb;
    delivered = 0; last_event = 0;
    for (int now = 0; now < CB_DEPTH - 2 && delivered < total; now++) begin
      // check starts
      for (int p = 0; p < NP; p++) begin
        if (pe_next[p] < pe_list[p].size() && now >= pe_free[p]) begin
          int c, d, cs;
          bit rdy;
          c = pe_list[p][pe_next[p]]; d = codes[id].deg[c]; rdy = 1;
          for (int k = 0; k < d; k++) if (arr[c][k] > now) rdy = 0;
          if (rdy) begin
            cnt_tab[id][p][now] = (d << BLK_W) | codes[id].blk[c];
            pe_free[p] = now + d;
            cs = now + d + 2;
            if (cmp_free[p] > cs) begin cs = cmp_free[p]; n_cmp_busy++; end
            cmp_free[p] = cs + d;
            for (int k = 0; k < d; k++) begin
              q_msg[p][4].push_back(c * MAXD + k);
              q_rdy[p][4].push_back(cs + 2 + k);
            end
            pe_next[p]++;
          end
        end
      end
      // routing
      for (int n = 0; n < NP; n++) begin
        bit used[NPORT];
        int word, occ;
        word = 32'h7fff;
        for (int o = 0; o < NPORT; o++) used[o] = 0;
        for (int ii = 0; ii < NPORT; ii++) begin
          int i;
          i = (ii + now) % NPORT;
          if (q_msg[n][i].size() > 0 && q_rdy[n][i][0] <= now) begin
            int m, c, k, j, l, dc_, dk, dst, o;
            m = q_msg[n][i][0]; c = m / MAXD; k = m % MAXD;
            j = codes[id].bits[c][k]; l = codes[id].lay_of[c];
            dc_ = codes[id].occ_c[j][(l + 1) % codes[id].nl];
            dk  = codes[id].occ_k[j][(l + 1) % codes[id].nl];
            dst = codes[id].pe[dc_];
            o = route_port(n, dst);
            if (!used[o]) begin
              used[o] = 1;
              word = (word & ~(7 << (3 * o))) | (i << (3 * o));
              void'(q_msg[n][i].pop_front()); void'(q_rdy[n][i].pop_front());
              if (i == 4 && o == 4) n_loop++;
              if (o == 4) begin
                wag_tab[id][n][now + 1] = codes[id].blk[dc_] * ND + dk;
                if (codes[id].lay_of[dc_] != 0) arr[dc_][dk] = now + 1;
                delivered++;
                last_event = now + 1;
              end else begin
                int nb;
                if (is_wrap(n, o)) n_wrap_link++;
                nb = neighbour(n, o);
                q_msg[nb][(o + 2) % 4].push_back(m);
                q_rdy[nb][(o + 2) % 4].push_back(now + 2);
              end
            end else n_wait++;
          end
        end
        rm_tab[id][n][now] = word;
        // occupancy after this cycle: entries pushed by the end of this cycle
        for (int i = 0; i < NPORT; i++) begin
          occ = 0;
          foreach (q_rdy[n][i][e]) if (q_rdy[n][i][e] <= now + 1) occ++;
          if (occ > max_fifo_model) max_fifo_model = occ;
        end
      end
    end
    codes[id].k = last_event + 1;
    if (delivered != total) begin
      failures++;
      $display("schedule %0d: only %0d of %0d messages delivered", id, delivered, total);
    end
    if (max_fifo_model > FIFO_LEN) begin
      failures++;
      $display("schedule %0d: FIFO occupancy %0d exceeds %0d", id, max_fifo_model, FIFO_LEN);
    end
    $display("code %0d: %0d bits, %0d checks, k = %0d cycles per iteration", id,
             codes[id].nb, codes[id].nchk, codes[id].k);
  endfunction

  // ------------------------------------------------------ reference model
  logic [QW-1:0] expq[NP][$];
  int llr[MAXB];

  function automatic int satq(int v);
    if (v > 127) return 127;
    if (v < -127) return -127;
    return v;
  endfunction

  // the expected stream is rebuilt by a second pass that records outputs in PE order
  function automatic void model_streams(int id);
    int lq[MAXB];
    int r[MAXC][MAXD];
    int x[MAXD];
    int outv[MAXC][MAXD];
    for (int p = 0; p < NP; p++) expq[p].delete();
    for (int j = 0; j < codes[id].nb; j++) lq[j] = llr[j];
    for (int c = 0; c < codes[id].nchk; c++) for (int k = 0; k < MAXD; k++) r[c][k] = 0;
    for (int it = 0; it < IT; it++) begin
      for (int c = 0; c < codes[id].nchk; c++) begin
        int m1, m2, sg;
        m1 = 127; m2 = 127; sg = 0;
        for (int k = 0; k < codes[id].deg[c]; k++) begin
          int a;
          x[k] = satq(lq[codes[id].bits[c][k]] - r[c][k]);
          a = (x[k] < 0) ? -x[k] : x[k];
          if (a < m1) begin m2 = m1; m1 = a; end
          else if (a < m2) m2 = a;
          sg ^= (x[k] < 0);
        end
        for (int k = 0; k < codes[id].deg[c]; k++) begin
          int a, mag, sc, s, rn;
          mag = (x[k] < 0) ? -x[k] : x[k];
          a = (mag != m1) ? m1 : m2;
          sc = (a * ALPHA_INV_Q7) >> 7;
          s = sg ^ (x[k] < 0);
          rn = s ? -sc : sc;
          r[c][k] = rn;
          outv[c][k] = satq(x[k] + rn);
          lq[codes[id].bits[c][k]] = outv[c][k];
        end
      end
      // checks of one PE appear in increasing check index (layer order)
      for (int c = 0; c < codes[id].nchk; c++)
        for (int k = 0; k < codes[id].deg[c]; k++)
          expq[codes[id].pe[c]].push_back(QW'(outv[c][k]));
    end
  endfunction

  // circular buffer wrap: the live region of node 0's RM crosses the end
  always @(posedge clk)
    if (rst_n && dut.g_row[0].g_col[0].u_node.u_rm.eof < dut.g_row[0].g_col[0].u_node.u_rm.sof)
      n_buf_wrap++;

  // ------------------------------------------------------------ checking
  int n_out = 0;
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (rst_n && soft_valid[p]) begin
        checks++;
        n_out++;
        if (expq[p].size() == 0) begin
          failures++;
          $display("PE %0d: unexpected output %0d", p, $signed(soft_data[p]));
        end else begin
          logic [QW-1:0] e;
          e = expq[p].pop_front();
          if (e !== soft_data[p]) begin
            failures++;
            if (failures < 10) $display("PE %0d: got %0d expected %0d (t=%0t)", p,
                                        $signed(soft_data[p]), $signed(e), $time);
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- drivers
  bit up_busy = 0;
  task automatic upload(int id);
    up_busy = 1;
    @(negedge clk) cfg_upload_start = 1;
    @(negedge clk) cfg_upload_start = 0;
    for (int c = 0; c < NN; c++) begin
      for (int w = 0; w < codes[id].k; w++) begin
        for (int r = 0; r < NN; r++) begin
          cfg_bus[r].node_id = ID_W'(c);
          cfg_bus[r].wag     = MEM_AW'(wag_tab[id][r * NN + c][w]);
          cfg_bus[r].rm      = RM_W'(rm_tab[id][r * NN + c][w]);
          cfg_bus[r].cnt     = CNT_W'(cnt_tab[id][r * NN + c][w]);
        end
        @(negedge clk);
      end
    end
    for (int r = 0; r < NN; r++) cfg_bus[r] = '{node_id: ID_IDLE, default: '0};
    up_busy = 0;
  endtask

  task automatic load_llr(int id);
    for (int j = 0; j < codes[id].nb; j++) begin
      int u;
      u = int'($urandom % 9) + int'($urandom % 9) + int'($urandom % 9) - 12 + 5;
      llr[j] = satq(u);
    end
    for (int j = 0; j < codes[id].nb; j++) begin
      int c, k;
      c = codes[id].occ_c[j][0]; k = codes[id].occ_k[j][0];
      @(negedge clk);
      llr_we = 1; llr_node = 8'(codes[id].pe[c]);
      llr_addr = MEM_AW'(codes[id].blk[c] * ND + k); llr_data = QW'(llr[j]);
    end
    @(negedge clk) llr_we = 0;
    model_streams(id);
  endtask

  int busy_cycles = 0;
  always @(posedge clk) if (start && !busy) busy_cycles <= 0; else if (busy) busy_cycles <= busy_cycles + 1;

  task automatic run_frame(int id, bit switch_to_next, int next_k);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    if (switch_to_next) begin
      wait (iter == ITER_W'(IT - 1) && !up_busy);
      @(negedge clk);
      cfg_len = CB_AW'(next_k); cfg_switch = 1;
      @(negedge clk) cfg_switch = 0;
      if (busy) n_switch_run++;
    end
    wait (done);
    @(negedge clk);
    checks++;
    if (busy_cycles != IT * codes[id].k) begin
      failures++;
      $display("frame of code %0d lasted %0d cycles, expected %0d", id, busy_cycles, IT * codes[id].k);
    end
    repeat (5) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (expq[p].size() != 0) begin
        failures++;
        $display("PE %0d: %0d outputs missing", p, expq[p].size());
      end
    end
  endtask

  // --------------------------------------------------------------- main
  initial begin
    for (int r = 0; r < NN; r++) cfg_bus[r] = '{node_id: ID_IDLE, default: '0};
    make_code(0, 100, 2, '{6, 4, 0, 0}, '{2, 4, 0, 0}, 7, 3);  // code A: 100 bits, 2 layers
    make_code(1, 60, 3, '{5, 6, 3, 0}, '{5, 6, 3, 0}, 9, 5);   // code B: 60 bits, 3 layers
    schedule(0);
    schedule(1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1: configure code A while idle
    upload(0);
    @(negedge clk) cfg_len = CB_AW'(codes[0].k); cfg_switch = 1;
    @(negedge clk) cfg_switch = 0;
    @(negedge clk);
    // 2..: frames alternate between A and B; the next code is always
    // uploaded behind the running one and switched in at the frame end
    for (int f = 0; f < NFRAMES; f++) begin
      int cur, nxt;
      cur = f % 2; nxt = 1 - cur;
      load_llr(cur);
      if (f < NFRAMES - 1) begin
        fork
          run_frame(cur, 1, codes[nxt].k);
          upload(nxt);
        join
      end else run_frame(cur, 0, 0);
    end
    $display("mechanisms: fifo_wait=%0d local_loop=%0d torus_wrap=%0d cmp_busy=%0d switch_running=%0d buffer_wrap=%0d outputs=%0d max_fifo=%0d",
             n_wait, n_loop, n_wrap_link, n_cmp_busy, n_switch_run, n_buf_wrap, n_out, max_fifo_model);
    checks += 6;
    if (n_wait == 0)       begin failures++; $display("no FIFO wait happened"); end
    if (n_loop == 0)       begin failures++; $display("no local loop-back happened"); end
    if (n_wrap_link == 0)  begin failures++; $display("no torus wrap link used"); end
    if (n_cmp_busy == 0)   begin failures++; $display("no compare-stage wait happened"); end
    if (n_switch_run == 0) begin failures++; $display("no switch while running"); end
    if (n_buf_wrap == 0)   begin failures++; $display("circular buffer never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
