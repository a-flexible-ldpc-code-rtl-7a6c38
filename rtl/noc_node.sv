// noc_node: one node of the torus: routing element, PE and configuration.
//
// The node joins a routing element (noc_router) and its processing element
// (ldpc_pe) through the router's local port, and holds the three circular
// configuration buffers the two need in every cycle of an iteration:
//   RM   15-bit crossbar word for the router,
//   WAG  10-bit L(q_j) memory write address for the value the router
//        delivers to the PE in that cycle,
//   CNT  11-bit CNT/CMP word {degree, block} that starts a check.
// The three buffers share one read-pointer behaviour (they receive the same
// run, switch and length controls), so they always read the same cycle of the
// iteration. They are written from the row's configuration bus through the
// node's CCU, which selects the node by its identifier NODE_ID.
// Network links: index 0..3 = north, east, south, west. A flit leaving on
// output p reaches the neighbour's input on the opposite side.
// Structure follows the paper's router, PE and configuration figures; the
// shared read pointer and the port numbering are this design's choices.
// Lint notes: the buffers' pointer outputs and the router's FIFO levels are
// left open here (they exist for observation and test); the reset is used
// asynchronously by the flops and synchronously only in the assertion's
// disable condition, which is not logic.
module noc_node
  import ldpc_pkg::*;
#(
  parameter logic [ID_W-1:0] NODE_ID    = '0,
  parameter int unsigned     FIFO_DEPTH = FIFO_LEN   // router input FIFO length
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              frame_start,
  // configuration
  input  cfg_bus_t          bus,
  input  logic              upload_start,
  input  logic              switch_req,
  input  logic [CB_AW-1:0]  switch_len,
  output logic              iter_last,
  // torus links
  input  logic              link_in_valid [4],
  input  logic [QW-1:0]     link_in_data  [4],
  output logic              link_out_valid[4],
  output logic [QW-1:0]     link_out_data [4],
  // channel LLR load
  input  logic              llr_we,
  input  logic [MEM_AW-1:0] llr_addr,
  input  logic [QW-1:0]     llr_data,
  // PE output stream (updated L(q_j) values), for observation
  output logic              soft_valid,
  output logic [QW-1:0]     soft_data,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count[NPORT]
);
  logic              sel;
  logic [RM_W-1:0]   rm_wr, rm_word;
  logic [MEM_AW-1:0] wag_wr, wag_word;
  logic [CNT_W-1:0]  cnt_wr, cnt_word;
  logic              il_rm, il_wag, il_cnt;

  ccu u_ccu (
    .my_id(NODE_ID), .bus, .sel,
    .rm_word(rm_wr), .wag_word(wag_wr), .cnt_word(cnt_wr)
  );

  cfg_circ_buffer #(.WIDTH(RM_W), .DEPTH(CB_DEPTH), .AW(CB_AW)) u_rm (
    .clk, .rst_n, .run, .upload_start, .wr_en(sel), .wr_data(rm_wr),
    .switch_req, .switch_len, .rd_data(rm_word), .iter_last(il_rm),
    .rdp(), .sof(), .eof(), .wrp(), .switch_pending()
  );

  cfg_circ_buffer #(.WIDTH(MEM_AW), .DEPTH(CB_DEPTH), .AW(CB_AW)) u_wag (
    .clk, .rst_n, .run, .upload_start, .wr_en(sel), .wr_data(wag_wr),
    .switch_req, .switch_len, .rd_data(wag_word), .iter_last(il_wag),
    .rdp(), .sof(), .eof(), .wrp(), .switch_pending()
  );

  cfg_circ_buffer #(.WIDTH(CNT_W), .DEPTH(CB_DEPTH), .AW(CB_AW)) u_cnt (
    .clk, .rst_n, .run, .upload_start, .wr_en(sel), .wr_data(cnt_wr),
    .switch_req, .switch_len, .rd_data(cnt_word), .iter_last(il_cnt),
    .rdp(), .sof(), .eof(), .wrp(), .switch_pending()
  );

  assign iter_last = il_rm;

  // router
  logic          r_in_valid [NPORT];
  logic [QW-1:0] r_in_data  [NPORT];
  logic          r_out_valid[NPORT];
  logic [QW-1:0] r_out_data [NPORT];
  logic          pe_out_valid;
  logic [QW-1:0] pe_out_data;

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      r_in_valid[p]     = link_in_valid[p];
      r_in_data[p]      = link_in_data[p];
      link_out_valid[p] = r_out_valid[p];
      link_out_data[p]  = r_out_data[p];
    end
    r_in_valid[P_LOCAL] = pe_out_valid;
    r_in_data[P_LOCAL]  = pe_out_data;
  end

  noc_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
    .clk, .rst_n, .run, .rm_word,
    .in_valid(r_in_valid), .in_data(r_in_data),
    .out_valid(r_out_valid), .out_data(r_out_data),
    .fifo_count
  );

  ldpc_pe u_pe (
    .clk, .rst_n, .run, .frame_start,
    .cnt_word, .wag_addr(wag_word),
    .in_valid(r_out_valid[P_LOCAL]), .in_data(r_out_data[P_LOCAL]),
    .llr_we, .llr_addr, .llr_data,
    .out_valid(pe_out_valid), .out_data(pe_out_data)
  );

  assign soft_valid = pe_out_valid;
  assign soft_data  = pe_out_data;

  // the three buffers are controlled together and must stay in step
  a_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (il_rm == il_wag) && (il_rm == il_cnt));
endmodule
