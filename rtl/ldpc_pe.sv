// ldpc_pe: processing element of the NoC-based layered min-sum LDPC decoder.
//
// The PE runs the layered normalized min-sum update for the parity checks
// mapped on it, one check after the other, in a pipeline:
//
//   CNT/CMP -> read L(q_j) and R_mj memories -> L(q_mj) = L(q_j) - R_mj(old)
//     -> MINIMUM EXTRACTION (min1, min2, sign XOR) and L(q_mj) FIFO
//     -> COMPARE, x 1/alpha -> R_mj(new) written back to the R_mj memory
//     -> L(q_j)(new) = L(q_mj) + R_mj(new) -> output buffer -> router.
//
// Incoming extrinsics arrive from the router's local output in an order set
// by the NoC schedule; each is written into the L(q_j) memory at the address
// given by the WAG (write address generator) memory word of that cycle, so
// that the values of every check end up in its own block of N_d locations.
// R_mj(new) is written back at the address it was read from, carried through
// a FIFO beside the L(q_mj) FIFO to cover the pipeline latency.
//
// Timing, for a check of degree d whose CNT/CMP start word is read in cycle
// t and with the compare stage free: memory reads in t+1..t+d, the L(q_mj)
// values in t+2..t+d+1, the check's minima are known in t+d+1, and the d new
// values leave the output buffer in cycles t+d+3 .. t+2d+2, one per cycle.
// If the compare stage is still busy with the previous check, the outputs
// follow right after that check's last output.
//
// This design's own choices, where the paper is silent: R_mj(old) reads as 0
// in the first iteration of a frame (a valid bit per location, cleared by
// frame_start); the channel LLRs are written into the L(q_j) memory through
// a load port while the decoder is idle; the output buffer is one register,
// the router's local input FIFO providing the queueing; results of finished
// minimum searches wait in a 4-entry FIFO.
module ldpc_pe
  import ldpc_pkg::*;
#(
  parameter int unsigned NDEG      = ND,
  parameter int unsigned DEPTH     = MEM_DEPTH,
  parameter int unsigned ALPHA_INV = ALPHA_INV_Q7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              frame_start,
  // configuration words of this cycle
  input  logic [CNT_W-1:0]  cnt_word,
  input  logic [MEM_AW-1:0] wag_addr,
  // extrinsics from the router (local output port)
  input  logic              in_valid,
  input  logic [QW-1:0]     in_data,
  // channel LLR load port
  input  logic              llr_we,
  input  logic [MEM_AW-1:0] llr_addr,
  input  logic [QW-1:0]     llr_data,
  // output buffer towards the router (local input port)
  output logic              out_valid,
  output logic [QW-1:0]     out_data
);
  localparam int unsigned LQF_DEPTH = 2 * NDEG;

  // ---------------- address generation ------------------------------------
  logic              rd_valid, rd_first, rd_last;
  logic [MEM_AW-1:0] rd_addr;

  cnt_cmp #(.NDEG(NDEG)) u_cnt (
    .clk, .rst_n, .run, .cfg_word(cnt_word),
    .rd_valid, .rd_addr, .rd_first, .rd_last
  );

  // ---------------- memories ----------------------------------------------
  logic              lq_we;
  logic [MEM_AW-1:0] lq_waddr;
  logic [QW-1:0]     lq_wdata, lq_rdata, r_rdata;
  logic              r_we;
  logic [MEM_AW-1:0] r_waddr;
  logic signed [QW-1:0] r_new, lq_new;
  logic              rvalid [DEPTH];

  assign lq_we    = in_valid || llr_we;
  assign lq_waddr = in_valid ? wag_addr : llr_addr;
  assign lq_wdata = in_valid ? in_data  : llr_data;

  dp_ram #(.WIDTH(QW), .DEPTH(DEPTH), .AW(MEM_AW)) u_lq_mem (
    .clk, .we(lq_we), .waddr(lq_waddr), .wdata(lq_wdata),
    .re(rd_valid), .raddr(rd_addr), .rdata(lq_rdata)
  );

  dp_ram #(.WIDTH(QW), .DEPTH(DEPTH), .AW(MEM_AW)) u_r_mem (
    .clk, .we(r_we), .waddr(r_waddr), .wdata(r_new),
    .re(rd_valid), .raddr(rd_addr), .rdata(r_rdata)
  );

  // ---------------- read stage registers ----------------------------------
  logic              v2, first2, last2, rv2;
  logic [MEM_AW-1:0] addr2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; first2 <= 1'b0; last2 <= 1'b0; addr2 <= '0; rv2 <= 1'b0;
    end else begin
      v2     <= rd_valid;
      first2 <= rd_first;
      last2  <= rd_last;
      addr2  <= rd_addr;
      rv2    <= (32'(rd_addr) < DEPTH) ? rvalid[rd_addr] : 1'b0;
    end
  end

  // R valid bits: cleared at the start of a frame, set by each R write
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) rvalid[i] <= 1'b0;
    end else if (frame_start) begin
      for (int i = 0; i < DEPTH; i++) rvalid[i] <= 1'b0;
    end else if (r_we && (32'(r_waddr) < DEPTH)) begin
      rvalid[r_waddr] <= 1'b1;
    end
  end

  // ---------------- subtraction (eq. 1) -----------------------------------
  logic signed [QW-1:0] lq_mj, r_old;
  assign r_old = rv2 ? $signed(r_rdata) : '0;
  assign lq_mj = sat((QW+2)'($signed(lq_rdata)) - (QW+2)'(r_old));

  // ---------------- minimum extraction ------------------------------------
  logic          res_valid, res_sign;
  logic [QW-2:0] res_min1, res_min2;

  min_extract u_min (
    .clk, .rst_n, .in_valid(v2), .in_first(first2), .in_last(last2), .in_data(lq_mj),
    .res_valid, .res_min1, .res_min2, .res_sign
  );

  // ---------------- FIFOs -------------------------------------------------
  localparam int unsigned RW = 2 * (QW - 1) + 1;
  logic [RW-1:0]   res_head;
  logic            res_empty, res_full;
  logic [QW:0]     lqf_head;                 // {last, L(q_mj)}
  logic            lqf_empty, lqf_full;
  logic [MEM_AW-1:0] wa_head;
  logic            waf_empty, waf_full;
  logic            go, pop_res;
  logic [$clog2(4+1)-1:0]         res_cnt;
  logic [$clog2(LQF_DEPTH+1)-1:0] lqf_cnt, waf_cnt;

  sync_fifo #(.WIDTH(RW), .DEPTH(4)) u_res_fifo (
    .clk, .rst_n, .push(res_valid), .wr_data({res_min1, res_min2, res_sign}),
    .pop(pop_res), .rd_data(res_head), .empty(res_empty), .full(res_full), .count(res_cnt)
  );

  sync_fifo #(.WIDTH(QW+1), .DEPTH(LQF_DEPTH)) u_lq_fifo (
    .clk, .rst_n, .push(v2), .wr_data({last2, lq_mj}),
    .pop(go), .rd_data(lqf_head), .empty(lqf_empty), .full(lqf_full), .count(lqf_cnt)
  );

  sync_fifo #(.WIDTH(MEM_AW), .DEPTH(LQF_DEPTH)) u_wa_fifo (
    .clk, .rst_n, .push(v2), .wr_data(addr2),
    .pop(go), .rd_data(wa_head), .empty(waf_empty), .full(waf_full), .count(waf_cnt)
  );

  assign go      = !res_empty && !lqf_empty;
  assign pop_res = go && lqf_head[QW];

  // ---------------- compare, 1/alpha, adder -------------------------------
  compare_unit #(.ALPHA_INV(ALPHA_INV)) u_cmp (
    .lq_mj(lqf_head[QW-1:0]),
    .min1(res_head[RW-1 -: QW-1]), .min2(res_head[QW-1:1]), .sign_all(res_head[0]),
    .r_new, .lq_new
  );

  assign r_we    = go;
  assign r_waddr = wa_head;

  // output buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= go;
      if (go) out_data <= lq_new;
    end
  end

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && llr_we));
endmodule
