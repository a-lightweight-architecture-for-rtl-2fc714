// waveform_buffer: the classifier's input registers.
//
// After a detection the controller steps capture_idx_i through 0..39 and
// the buffer stores the filtered sample of each cycle, reduced from 10 to
// 8 bits by dropping the two least significant bits (a division by 4, as
// the training data was scaled). The 40 registers are read in parallel by
// the classifier. Capturing 40 filtered samples after the detection and the
// division by 4 are published; the indexed write and the arithmetic (rounding
// toward minus infinity) shift are this design's choice.
//
// Interface: while we_i is high, wave_o[capture_idx_i] <= x_i >>> 2 at the
// rising clk edge. All registers reset to zero.
module waveform_buffer
  import spike_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we_i,
  input  logic [5:0] idx_i,
  input  sample_t    x_i,
  output act_t       wave_o [WAVE_LEN]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WAVE_LEN; i++) wave_o[i] <= '0;
    end else if (we_i && idx_i < 6'(WAVE_LEN)) begin
      wave_o[idx_i] <= act_t'(x_i >>> (SAMPLE_W - ACT_W));
    end
  end

endmodule
