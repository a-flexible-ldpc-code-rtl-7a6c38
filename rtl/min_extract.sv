// min_extract: MINIMUM EXTRACTION unit of the PE (normalized min-sum).
//
// Receives the L(q_mj) values of one parity check, one per cycle, with
// in_first on the first and in_last on the last. It keeps the smallest
// magnitude (min1), the second smallest (min2) and the XOR of all sign bits.
// On the last value it presents the final {min1, min2, sign} for one cycle on
// res_*, computed combinationally from the running registers and the last
// input, so the result is available in the same cycle as the last input.
// A value equal to the running min1 becomes min2 as well, so with two equal
// minima min1 == min2, as the min-sum rule needs.
// Magnitudes are QW-1 bits: the value range is symmetric, so |x| always fits.
// Behaviour follows the paper's equations; the handshake is this design's.
module min_extract
  import ldpc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic signed [QW-1:0] in_data,
  output logic              res_valid,
  output logic [QW-2:0]     res_min1,
  output logic [QW-2:0]     res_min2,
  output logic              res_sign
);
  logic [QW-2:0] min1_q, min2_q, min1_d, min2_d, mag, m1, m2;
  logic          sign_q, sign_d, s0;

  always_comb begin
    mag = (QW-1)'(in_data[QW-1] ? -in_data : in_data);
    // running values, or a fresh start on the first input
    m1 = in_first ? '1 : min1_q;
    m2 = in_first ? '1 : min2_q;
    s0 = in_first ? 1'b0 : sign_q;
    if (mag < m1) begin
      min1_d = mag;
      min2_d = m1;
    end else begin
      min1_d = m1;
      min2_d = (mag < m2) ? mag : m2;
    end
    sign_d = s0 ^ in_data[QW-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min1_q <= '1;
      min2_q <= '1;
      sign_q <= 1'b0;
    end else if (in_valid) begin
      min1_q <= min1_d;
      min2_q <= min2_d;
      sign_q <= sign_d;
    end
  end

  assign res_valid = in_valid && in_last;
  assign res_min1  = min1_d;
  assign res_min2  = min2_d;
  assign res_sign  = sign_d;
endmodule
