// cnt_cmp: read address generator (counter + comparator) of the PE.
//
// The values of one parity check sit in consecutive locations of the L(q_j)
// and R_mj memories, starting at a multiple of N_d. A check is therefore read
// by loading a counter with that offset and incrementing it once per cycle;
// a comparator on the read count recognises the last of the check's reads,
// after which the counter can be loaded with the next check's offset.
//
// The next check comes from the CNT/CMP configuration word of the current
// cycle: a block index (check number within the PE) and the check degree.
// Degree 0 means no check starts. A start word in cycle t gives reads in
// cycles t+1 .. t+deg; a new start word may arrive in the cycle of the last
// read, so checks can be read back to back. rd_first and rd_last mark the
// first and the last read of a check.
// Counter, offset and comparator follow the paper; the per-cycle word with
// a "no start" code is this design's way of timing the start of each check.
module cnt_cmp
  import ldpc_pkg::*;
#(
  parameter int unsigned NDEG = ND
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic [CNT_W-1:0]  cfg_word,
  output logic              rd_valid,
  output logic [MEM_AW-1:0] rd_addr,
  output logic              rd_first,
  output logic              rd_last
);
  cnt_word_t        w;
  logic [DEG_W-1:0] cnt_q, deg_q;
  logic             load;

  assign w        = cnt_word_t'(cfg_word);
  assign load     = run && (w.deg != '0);
  assign rd_first = rd_valid && (cnt_q == '0);
  assign rd_last  = rd_valid && (cnt_q == deg_q - 1'b1);   // comparator

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_addr  <= '0;
      cnt_q    <= '0;
      deg_q    <= '0;
    end else if (load) begin
      rd_valid <= 1'b1;
      rd_addr  <= MEM_AW'(32'(w.blk) * NDEG);
      cnt_q    <= '0;
      deg_q    <= w.deg;
    end else if (rd_valid) begin
      if (rd_last) rd_valid <= 1'b0;
      rd_addr <= rd_addr + 1'b1;
      cnt_q   <= cnt_q + 1'b1;
    end
  end

  // a new check may only start on the last read of the previous one or later
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (!rd_valid || rd_last));
  a_deg_bound: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (32'(w.deg) <= NDEG));
endmodule
