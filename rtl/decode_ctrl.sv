// decode_ctrl: frame and iteration control of the decoder.
//
// A start pulse begins a frame: frame_start is pulsed for one cycle (it
// clears the PEs' R_mj valid bits, so the first iteration uses R_mj(old)=0)
// and run is raised. Every node reads one configuration word per cycle; the
// iteration ends in the cycle in which the read pointers reach EOF
// (iter_last). After it_max iterations run is dropped and done is pulsed.
// The configuration buffers apply a pending code switch at that same
// boundary, so frames of different codes can follow each other directly.
// The paper fixes the maximum iteration counts (10 and 14 for WiMAX codes)
// but does not describe this controller; the start/done handshake is this
// design's choice. Early stopping is not part of it.
module decode_ctrl
  import ldpc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ITER_W-1:0] it_max,
  input  logic              iter_last,
  output logic              run,
  output logic              frame_start,
  output logic              done,
  output logic [ITER_W-1:0] iter
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run         <= 1'b0;
      frame_start <= 1'b0;
      done        <= 1'b0;
      iter        <= '0;
    end else begin
      frame_start <= 1'b0;
      done        <= 1'b0;
      if (!run) begin
        if (start && it_max != '0) begin
          run         <= 1'b1;
          frame_start <= 1'b1;
          iter        <= '0;
        end
      end else if (iter_last) begin
        if (iter == it_max - 1'b1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        iter <= iter + 1'b1;
      end
    end
  end
endmodule
