// tb_wifi_code: the IEEE 802.11n (WiFi) configuration of the decoder, a
// 4 x 4 torus (top parameter N = 4, 16 PEs), decoding rate-3/4 codes with
// It_max = 15.
//
// The codes are quasi-cyclic with the WiFi structure: 24 block columns and
// 6 block rows (five of degree 14, one of degree 15); lengths 1296 and 648
// (expansion factors 54 and 27) are decoded, 1296, 648, 1296 in turn.
// Block columns and shifts are drawn at random, so the matrices are not the
// standard's. Each block row is one layer; checks are dealt to the PEs in
// turn. The longest WiFi code (1944 bits, z = 81, 486 checks) is within the
// PE memories (31 of 47 check blocks) but, with this testbench's simple XY
// schedule, its iteration needs about 760 to 800 cycles and rarely fits the
// 767-word configuration buffers, so it is not run here.
//
// A drawn code whose schedule does not fit is drawn again (up to 8 times).
// The schedule lets a PE keep up to 10 outputs waiting for the router, its
// queue taking priority from 6 entries, and moves a flit only into a FIFO
// with room. Each frame is followed by an upload of the next code and a code
// switch; since two of these codes never fit the buffers together, part of
// every upload is written after the frame. Every PE output is compared with
// a bit-accurate layered normalized min-sum model, and each frame must last
// It_max x k cycles. The router FIFOs keep the WiMAX sizing of 7 entries:
// the WiFi decoder's 3-entry FIFOs are available through the top's
// FIFO_DEPTH parameter, but they need a better schedule than this simple
// one, which then runs into deadlock among the ring FIFOs.
`timescale 1ns/1ps
module tb_wifi_code;
  import ldpc_pkg::*;

  localparam int NN   = 4;
  localparam int FD   = FIFO_LEN;         // router FIFO length (see header)
  localparam int NP   = NN * NN;
  localparam int MAXB = 2304;
  localparam int MAXC = 1152;
  localparam int MAXL = 12;
  localparam int MAXD = 20;
  localparam int NFRAMES = 3;
  localparam int ZB = 24;                // block columns of the base matrix
  // n, rate index (0: 1/2, 1: 5/6), iteration length implied by the
  // published throughput (info bits x 300 MHz / (It_max x T))
  int wl_n  [NFRAMES] = '{1296, 648, 1296};
  int wl_r  [NFRAMES] = '{2, 2, 2};
  int IT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start = 0;
  logic [ITER_W-1:0] it_max = '0;
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

  ldpc_noc_decoder #(.N(NN), .FIFO_DEPTH(FD)) dut (.*);

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
    int occ_c [MAXB][MAXL];     // check of bit j in layer l, -1 if none
    int occ_k [MAXB][MAXL];
    int first_l[MAXB];          // first layer containing bit j, -1 if none
    int dst_c [MAXC][MAXD];     // next check (cyclically) using the same bit
    int dst_k [MAXC][MAXD];
    bit first [MAXC][MAXD];     // position holds the bit's first appearance
    int k;                      // cycles per iteration
    int it;                     // It_max
  } code_t;

  code_t codes[2];
  int rm_tab  [2][NP][CB_DEPTH];
  int wag_tab [2][NP][CB_DEPTH];
  int cnt_tab [2][NP][CB_DEPTH];

  // mechanism counters
  int n_split = 0, n_wait = 0, n_loop = 0, n_wrap_link = 0, n_cmp_busy = 0, n_switch_run = 0, n_buf_wrap = 0;
  int max_fifo_model = 0;

  // quasi-cyclic code: nl block rows, ZB block columns, expansion z
  function automatic void make_code(int id, int n, int rate);
    int z, c, nl;
    int rdeg[MAXL];
    int colw[ZB];
    int cnt_pe[NP];
    z = n / ZB;
    nl = 6;
    for (int l = 0; l < nl; l++) rdeg[l] = (l == 0) ? 15 : 14;
    codes[id].nb = n; codes[id].nl = nl; codes[id].it = 15;
    for (int b = 0; b < ZB; b++) colw[b] = 0;
    for (int p = 0; p < NP; p++) cnt_pe[p] = 0;
    for (int j = 0; j < n; j++)
      for (int l = 0; l < MAXL; l++) codes[id].occ_c[j][l] = -1;
    c = 0;
    for (int l = 0; l < nl; l++) begin
      int cols[ZB];
      int sh[ZB];
      bit taken[ZB];
      codes[id].lay_first[l] = c;
      for (int b = 0; b < ZB; b++) taken[b] = 0;
      // pick the least used block columns, ties broken at random
      for (int e = 0; e < rdeg[l]; e++) begin
        int best, bw, r0;
        best = -1; bw = 1 << 30; r0 = int'($urandom % ZB);
        for (int bb = 0; bb < ZB; bb++) begin
          int b;
          b = (bb + r0) % ZB;
          if (!taken[b] && colw[b] < bw) begin best = b; bw = colw[b]; end
        end
        taken[best] = 1; colw[best]++;
        cols[e] = best; sh[e] = int'($urandom % z);
      end
      for (int i = 0; i < z; i++) begin
        codes[id].deg[c] = rdeg[l];
        codes[id].lay_of[c] = l;
        for (int e = 0; e < rdeg[l]; e++) begin
          int j;
          j = cols[e] * z + (i + sh[e]) % z;
          codes[id].bits[c][e] = j;
          codes[id].occ_c[j][l] = c;
          codes[id].occ_k[j][l] = e;
        end
        codes[id].pe[c]  = c % NP;
        codes[id].blk[c] = cnt_pe[c % NP];
        cnt_pe[c % NP]++;
        c++;
      end
    end
    codes[id].lay_first[nl] = c;
    codes[id].nchk = c;
    for (int j = 0; j < n; j++) begin
      codes[id].first_l[j] = -1;
      for (int l = nl - 1; l >= 0; l--) if (codes[id].occ_c[j][l] >= 0) codes[id].first_l[j] = l;
    end
    for (int cc = 0; cc < c; cc++)
      for (int e = 0; e < codes[id].deg[cc]; e++) begin
        int j, l, l2;
        j = codes[id].bits[cc][e]; l = codes[id].lay_of[cc];
        l2 = (l + 1) % nl;
        while (codes[id].occ_c[j][l2] < 0) l2 = (l2 + 1) % nl;
        codes[id].dst_c[cc][e] = codes[id].occ_c[j][l2];
        codes[id].dst_k[cc][e] = codes[id].occ_k[j][l2];
        codes[id].first[cc][e] = (l == codes[id].first_l[j]);
      end
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

  int arr[MAXC][MAXD];
  localparam int slack = 10;     // PE outputs allowed to wait before a check starts
  localparam int urg_lvl = 6;   // local queue level that takes priority
  function automatic bit schedule(int id);
    int pe_list[NP][$];
    int pe_next[NP], pe_free[NP], cmp_free[NP];
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
      for (int k = 0; k < codes[id].deg[c]; k++) arr[c][k] = codes[id].first[c][k] ? -1 : 1 << 30;
    end
    total = 0;
    for (int c = 0; c < codes[id].nchk; c++) total += codes[id].deg[c];
    delivered = 0; last_event = 0;
    for (int now = 0; now < CB_DEPTH - 2 && delivered < total; now++) begin
      // check starts
      for (int p = 0; p < NP; p++) begin
        if (pe_next[p] < pe_list[p].size() && now >= pe_free[p] && q_msg[p][4].size() <= slack) begin
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
        bit urgent;
        word = 32'h7fff;
        for (int o = 0; o < NPORT; o++) used[o] = 0;
        urgent = 0;
        occ = 0;
        foreach (q_rdy[n][4][e]) if (q_rdy[n][4][e] <= now) occ++;
        if (occ >= urg_lvl) urgent = 1;
        for (int ii = 0; ii < NPORT; ii++) begin
          int i;
          // rotating priority; the PE's own queue goes first once it fills up
          if (urgent) i = (ii == 0) ? 4 : (ii - 1 + now) % 4;
          else        i = (ii + now) % NPORT;
          if (q_msg[n][i].size() > 0 && q_rdy[n][i][0] <= now) begin
            int m, c, k, dc_, dk, dst, o;
            m = q_msg[n][i][0]; c = m / MAXD; k = m % MAXD;
            dc_ = codes[id].dst_c[c][k];
            dk  = codes[id].dst_k[c][k];
            dst = codes[id].pe[dc_];
            o = route_port(n, dst);
            if (!used[o] && (o == 4 || q_msg[neighbour(n, o)][(o + 2) % 4].size() < FD)) begin
              used[o] = 1;
              word = (word & ~(7 << (3 * o))) | (i << (3 * o));
              void'(q_msg[n][i].pop_front()); void'(q_rdy[n][i].pop_front());
              if (i == 4 && o == 4) n_loop++;
              if (o == 4) begin
                wag_tab[id][n][now + 1] = codes[id].blk[dc_] * ND + dk;
                if (!codes[id].first[dc_][dk]) arr[dc_][dk] = now + 1;
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
    return delivered == total && max_fifo_model <= FD && codes[id].k <= CB_DEPTH - 2;
  endfunction

  // a code whose schedule does not fit is redrawn, as an off-line flow would
  int n_tries = 0;
  task automatic make_scheduled(int id, int n, int rate);
    bit ok;
    ok = 0;
    for (int t = 0; t < 8 && !ok; t++) begin
      int keep;
      keep = max_fifo_model;
      make_code(id, n, rate);
      max_fifo_model = 0;
      ok = schedule(id);
      if (max_fifo_model < keep) max_fifo_model = keep;
      n_tries++;
    end
    checks++;
    if (!ok) begin
      failures++;
      $display("no schedule of code %0d fits the circular buffers", id);
    end
  endtask

  // ------------------------------------------------------ reference model
  logic [QW-1:0] expq[NP][$];
  int llr[MAXB];

  function automatic int satq(int v);
    if (v > 127) return 127;
    if (v < -127) return -127;
    return v;
  endfunction

  // the expected stream is rebuilt by a second pass that records outputs in PE order
  int lq[MAXB];
  int r[MAXC][MAXD];
  int outv[MAXC][MAXD];
  function automatic void model_streams(int id);
    int x[MAXD];
    for (int p = 0; p < NP; p++) expq[p].delete();
    for (int j = 0; j < codes[id].nb; j++) lq[j] = llr[j];
    for (int c = 0; c < codes[id].nchk; c++) for (int k = 0; k < MAXD; k++) r[c][k] = 0;
    for (int it = 0; it < codes[id].it; it++) begin
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
  // words w0..w1-1 of every node's configuration; each node's write pointer
  // continues where its previous part stopped
  task automatic upload(int id, int w0, int w1);
    up_busy = 1;
    if (w0 == 0) begin
      @(negedge clk) cfg_upload_start = 1;
      @(negedge clk) cfg_upload_start = 0;
    end
    for (int c = 0; c < NN; c++) begin
      for (int w = w0; w < w1; w++) begin
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
      if (codes[id].first_l[j] < 0) continue;
      c = codes[id].occ_c[j][codes[id].first_l[j]]; k = codes[id].occ_k[j][codes[id].first_l[j]];
      @(negedge clk);
      llr_we = 1; llr_node = 8'(codes[id].pe[c]);
      llr_addr = MEM_AW'(codes[id].blk[c] * ND + k); llr_data = QW'(llr[j]);
    end
    @(negedge clk) llr_we = 0;
    model_streams(id);
  endtask

  int busy_cycles = 0;
  bit got_done = 0;
  always @(posedge clk) if (done) got_done <= 1;
  always @(posedge clk) if (start && !busy) busy_cycles <= 0; else if (busy) busy_cycles <= busy_cycles + 1;

  task automatic run_frame(int id, bit switch_to_next, int next_k);
    IT = codes[id].it;
    it_max = ITER_W'(IT);
    got_done = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    if (switch_to_next) begin
      wait ((iter == ITER_W'(IT - 1) && !up_busy) || got_done);
      if (!got_done) begin
        @(negedge clk);
        cfg_len = CB_AW'(next_k); cfg_switch = 1;
        @(negedge clk) cfg_switch = 0;
        if (busy) n_switch_run++;
      end
    end
    wait (got_done);
    if (switch_to_next && !busy && up_busy) begin
      wait (!up_busy);
      @(negedge clk) cfg_len = CB_AW'(next_k); cfg_switch = 1;
      @(negedge clk) cfg_switch = 0;
    end
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
    make_scheduled(0, wl_n[0], wl_r[0]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // configure the first code while idle
    upload(0, 0, codes[0].k);
    @(negedge clk) cfg_len = CB_AW'(codes[0].k); cfg_switch = 1;
    @(negedge clk) cfg_switch = 0;
    @(negedge clk);
    for (int f = 0; f < NFRAMES; f++) begin
      int cur, nxt, free_w;
      cur = f % 2; nxt = 1 - cur;
      $display("WiFi n=%0d rate 3/4: %0d checks, %0d layers, k = %0d cycles",
               codes[cur].nb, codes[cur].nchk, codes[cur].nl, codes[cur].k);
      load_llr(cur);
      if (f < NFRAMES - 1) begin
        make_scheduled(nxt, wl_n[f + 1], wl_r[f + 1]);
        // words that land outside the running code's region go in while it
        // decodes; the rest (if any) after the frame, before the switch
        free_w = CB_DEPTH - codes[cur].k;
        if (codes[nxt].k <= free_w) begin
          fork
            run_frame(cur, 1, codes[nxt].k);
            upload(nxt, 0, codes[nxt].k);
          join
        end else begin
          n_split++;
          fork
            run_frame(cur, 0, 0);
            upload(nxt, 0, free_w);
          join
          upload(nxt, free_w, codes[nxt].k);
          @(negedge clk) cfg_len = CB_AW'(codes[nxt].k); cfg_switch = 1;
          @(negedge clk) cfg_switch = 0;
        end
      end else run_frame(cur, 0, 0);
    end
    $display("mechanisms: fifo_wait=%0d local_loop=%0d torus_wrap=%0d cmp_busy=%0d switch_running=%0d buffer_wrap=%0d outputs=%0d max_fifo=%0d split_uploads=%0d code_draws=%0d",
             n_wait, n_loop, n_wrap_link, n_cmp_busy, n_switch_run, n_buf_wrap, n_out, max_fifo_model, n_split, n_tries);
    checks += 5;
    if (n_wait == 0)       begin failures++; $display("no FIFO wait happened"); end
    if (n_loop == 0)       begin failures++; $display("no local loop-back happened"); end
    if (n_wrap_link == 0)  begin failures++; $display("no torus wrap link used"); end
    if (n_split == 0)      begin failures++; $display("no upload had to be split"); end
    if (n_buf_wrap == 0)   begin failures++; $display("circular buffer never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
