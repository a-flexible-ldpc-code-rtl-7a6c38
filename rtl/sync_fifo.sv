// sync_fifo: synchronous first-in first-out queue.
//
// Used as the input FIFO of every routing-element port (depth 7 for the WiMAX
// decoder) and as the short FIFOs inside the processing element. A push and a
// pop may happen in the same cycle. The head word is visible on rd_data in the
// cycle after it was pushed (no fall-through). The queue is held in a register
// array addressed by wrapping read and write pointers; an occupancy counter
// gives empty, full and the current fill level. Pushing into a full queue or
// popping an empty one is a scheduling error: the decoder's routing memories
// are computed off-line so that it never happens, and assertions flag it.
// The paper gives only the queue's purpose and depth; the structure is the
// plain textbook one.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
