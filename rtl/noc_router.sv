// noc_router: routing element of one NoC node (input-queued, table driven).
//
// Five ports: north, east, south, west and the local PE. Every incoming flit
// is pushed into the FIFO of its input port. A crossbar connects the FIFO
// heads to five output registers, which drive the output links directly.
// The router makes no routing decision of its own: in each cycle the routing
// memory (RM) supplies a 15-bit word holding, for every output port, the
// 3-bit number of the input FIFO whose head it takes (0..4), or 7 when the
// output stays idle. A FIFO is popped when at least one output selects it.
// Because the RM contents are derived off-line by simulating the whole NoC
// for one decoding iteration, a flit carries only its payload: no destination
// and no check identifier (the "zero overhead" NoC).
//
// Timing: a flit that is valid on an input link in cycle t is in the FIFO from
// cycle t+1; if the RM word selects it in cycle s >= t+1 it is in the output
// register, and so on the output link, in cycle s+1.
// Port numbering and the RM word packing (output p uses bits 3p+2..3p) are
// this design's choices; the structure follows the paper's router figure.
module noc_router
  import ldpc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = FIFO_LEN,
  parameter int unsigned W          = QW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,        // RM word is applied only while decoding
  input  logic [RM_W-1:0]      rm_word,
  input  logic                 in_valid [NPORT],
  input  logic [W-1:0]         in_data  [NPORT],
  output logic                 out_valid[NPORT],
  output logic [W-1:0]         out_data [NPORT],
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count[NPORT]
);
  logic [W-1:0] head [NPORT];
  logic         empty[NPORT];
  logic         full [NPORT];
  logic         pop  [NPORT];
  logic [SEL_W-1:0] sel[NPORT];

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      sel[p] = run ? rm_word[p*SEL_W +: SEL_W] : SEL_W'(P_NONE);
    end
    for (int i = 0; i < NPORT; i++) begin
      pop[i] = 1'b0;
      for (int p = 0; p < NPORT; p++) begin
        if (sel[p] == SEL_W'(i)) pop[i] = 1'b1;
      end
    end
  end

  for (genvar i = 0; i < NPORT; i++) begin : g_in
    sync_fifo #(.WIDTH(W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(in_valid[i]), .wr_data(in_data[i]),
      .pop(pop[i]), .rd_data(head[i]),
      .empty(empty[i]), .full(full[i]), .count(fifo_count[i])
    );
  end

  // crossbar and output registers
  for (genvar p = 0; p < NPORT; p++) begin : g_out
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[p] <= 1'b0;
        out_data[p]  <= '0;
      end else begin
        out_valid[p] <= (sel[p] < SEL_W'(NPORT));
        if (sel[p] < SEL_W'(NPORT)) out_data[p] <= head[sel[p]];
      end
    end
    // an output may only take the head of a FIFO that holds a flit
    a_sel_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
      (sel[p] < SEL_W'(NPORT)) |-> !empty[sel[p]]);
    a_sel_code: assert property (@(posedge clk) disable iff (!rst_n)
      (sel[p] < SEL_W'(NPORT)) || (sel[p] == SEL_W'(P_NONE)));
  end
endmodule
