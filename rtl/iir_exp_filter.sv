// iir_exp_filter: first-order exponential IIR low-pass filter.
//
//   y[n] = y[n-1] + (x[n] - y[n-1]) / 2^K
//
// The division is an arithmetic right shift, so the filter needs one
// subtractor, one adder and no multiplier. The pipeline uses it twice: as
// IIR filter 1 on the raw samples (smoothing high-frequency noise) and as
// IIR filter 2 on the NEO energy. That both are first-order exponential
// filters is published; the smoothing constant alpha = 2^-K (the top level
// uses K = 1 for filter 1 and K = 3 for filter 2)
// and the shift implementation are this design's choice.
//
// Interface: x_i is read on every rising clk edge at which en_i is high; the
// filtered value y_o is a register, so it reflects x_i one cycle later. When
// en_i is low the state is held, or cleared to zero if CLEAR_WHEN_OFF is set
// (used for IIR filter 2, so that it restarts from zero energy after the
// controller re-enables it). Asynchronous active-low reset clears the state.
module iir_exp_filter #(
  parameter int W              = 10,  // data width (signed)
  parameter int K              = 1,   // alpha = 2^-K
  parameter bit CLEAR_WHEN_OFF = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en_i,
  input  logic signed [W-1:0] x_i,
  output logic signed [W-1:0] y_o
);

  logic signed [W:0] diff;
  logic signed [W:0] step;

  always_comb begin
    diff = (W+1)'(x_i) - (W+1)'(y_o);
    step = diff >>> K;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      y_o <= '0;
    else if (en_i)
      y_o <= W'((W+1)'(y_o) + step);
    else if (CLEAR_WHEN_OFF)
      y_o <= '0;
  end

endmodule
