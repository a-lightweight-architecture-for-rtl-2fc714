// threshold_register: holds the detection threshold used by the comparator.
//
// The calculator's result is copied in on the first cycle its threshold
// flag is seen, after which the register keeps that value (the calculator
// is switched off once the controller leaves INIT) and reports valid_o.
// Until then the register holds the largest positive energy, so no
// detection can happen against an unset threshold. The register itself is
// published as a block; the load rule and the reset value are this design's
// choice.
//
// Interface: load_i is the threshold flag (level); thr_o changes on the
// clock edge after load_i first rises; asynchronous active-low reset.
module threshold_register
  import spike_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load_i,
  input  energy_t thr_i,
  output energy_t thr_o,
  output logic    valid_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr_o   <= {1'b0, {(NEO_W-1){1'b1}}};
      valid_o <= 1'b0;
    end else if (load_i && !valid_o) begin
      thr_o   <= thr_i;
      valid_o <= 1'b1;
    end
  end

endmodule
