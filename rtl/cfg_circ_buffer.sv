// cfg_circ_buffer: circular configuration buffer with its local write control.
//
// Each node holds three of these: the routing memory (RM), the WAG memory and
// the CNT/CMP memory. Each stores one word per clock cycle of a decoding
// iteration, so a code whose iteration lasts k cycles occupies k consecutive
// locations (modulo the capacity B) between the Start Of Frame (SOF) and End
// Of Frame (EOF) registers. While the decoder runs, the Read Pointer (RDP)
// steps from SOF to EOF once per cycle and wraps back to SOF: the word at
// RDP is the configuration applied in the current cycle (combinational read).
//
// A new code is written while the old one is in use, through the Write
// Pointer (WRP): upload_start sets WRP = EOF+1, and each write stores a word
// at WRP and advances it (modulo B). A switch request (switch_req with the
// new length k2) is held until the decoder is idle or RDP reaches EOF; then
// SOF becomes EOF+1, EOF becomes SOF+k2-1 (modulo B) and RDP jumps to the new
// SOF, so the next iteration runs the new code with no pause. Since writes
// may overlap the region being read, the three upload phases of the paper
// (free region, last old iteration, first new iteration) are all possible;
// keeping the write ahead of the reads is up to whoever drives the bus.
//
// Follows the paper: SOF/EOF/RDP/WRP, WRP start at EOF+1, SOF2 = EOF1+1,
// B = 767. This design's choices: the new EOF is SOF2+k2-1 (the paper writes
// SOF2+k2, which would hold k2+1 words), reset state SOF=0, EOF=B-1, RDP=0,
// and a switch applied only at an iteration boundary or while idle.
module cfg_circ_buffer #(
  parameter int unsigned WIDTH = 15,
  parameter int unsigned DEPTH = 767,
  parameter int unsigned AW    = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,          // decoder active: RDP advances
  // write side (local CCU)
  input  logic             upload_start,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  // code switch
  input  logic             switch_req,
  input  logic [AW-1:0]    switch_len,   // k2, words per iteration of the new code
  // read side
  output logic [WIDTH-1:0] rd_data,
  output logic             iter_last,    // RDP == EOF while running
  output logic [AW-1:0]    rdp,
  output logic [AW-1:0]    sof,
  output logic [AW-1:0]    eof,
  output logic [AW-1:0]    wrp,
  output logic             switch_pending
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    pend_len;
  logic             do_switch;
  logic [AW-1:0]    new_sof, new_eof;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  function automatic logic [AW-1:0] add_mod(input logic [AW-1:0] a, input logic [AW-1:0] b);
    logic [AW:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= (AW+1)'(DEPTH)) ? AW'(s - (AW+1)'(DEPTH)) : s[AW-1:0];
  endfunction

  assign rd_data   = mem[rdp];
  assign iter_last = run && (rdp == eof);
  assign do_switch = switch_pending && (!run || rdp == eof);
  assign new_sof   = inc(eof);
  assign new_eof   = add_mod(new_sof, pend_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sof            <= '0;
      eof            <= AW'(DEPTH - 1);
      rdp            <= '0;
      wrp            <= '0;
      pend_len       <= '0;
      switch_pending <= 1'b0;
    end else begin
      if (upload_start)  wrp <= inc(eof);
      else if (wr_en)    wrp <= inc(wrp);

      if (switch_req) begin
        switch_pending <= 1'b1;
        pend_len       <= switch_len;
      end

      if (do_switch && !switch_req) begin
        sof            <= new_sof;
        eof            <= new_eof;
        rdp            <= new_sof;
        switch_pending <= 1'b0;
      end else if (run) begin
        rdp <= (rdp == eof) ? sof : inc(rdp);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wrp] <= wr_data;
  end

  a_len_ok: assert property (@(posedge clk) disable iff (!rst_n)
    switch_req |-> (switch_len != 0 && 32'(switch_len) <= DEPTH));
endmodule
