// spike_comparator: spike-detection comparator.
//
// Raises the detection flag when the smoothed NEO energy is strictly above
// the threshold, and only while the controller enables detection (state
// RUNNING). The comparison against the threshold is published; registering
// the flag (one cycle of latency, a clean single-source flag for the
// controller) is this design's choice.
//
// Interface: det_o = registered (en_i && energy_i > thr_i), signed compare.
module spike_comparator
  import spike_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en_i,
  input  energy_t energy_i,
  input  energy_t thr_i,
  output logic    det_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      det_o <= 1'b0;
    else
      det_o <= en_i && (energy_i > thr_i);
  end

endmodule
