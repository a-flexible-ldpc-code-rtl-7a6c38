// dp_ram: two-port memory with one write port and one registered read port.
//
// This is the storage of the PE's L(q_j) MEMORY and R_mj MEMORY. Each holds
// N_pc x N_d words (47 x 20 = 940 for the WiMAX decoder): the memory is split
// into N_pc blocks of N_d consecutive words, one block per parity check mapped
// on the PE, and the values of a check are stored in its block in the order in
// which the check reads them. A write and a read can happen in the same
// cycle; the read returns the word stored before that cycle's write
// (read-before-write). Read data appears one cycle after the address.
// Size and two-port organisation follow the paper; the read latency and the
// collision behaviour are this design's choices.
module dp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 940,
  parameter int unsigned AW    = 10
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
