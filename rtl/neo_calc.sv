// neo_calc: nonlinear energy operator (NEO) on the filtered sample stream.
//
//   psi[n-1] = x[n-1]^2 - x[n] * x[n-2]
//
// The operator responds to signals that are both large and fast, which is
// what a spike is, and is zero for a constant (DC offset) input. Two delay
// registers hold x[n-1] and x[n-2]; they shift on every cycle so the history
// is always current, even while the operator itself is disabled. The NEO as
// detector front end is published; the pipeline timing and the behaviour
// while disabled are this design's choice.
//
// Interface: one sample x_i per clock. psi_o is registered: in the cycle
// after x_i = x[n] is presented, psi_o = psi[n-1]. While en_i is low psi_o is
// forced to zero (the controller disables the NEO outside RUNNING).
module neo_calc
  import spike_pkg::*;
#(
  parameter int W = SAMPLE_W   // input width (signed)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en_i,
  input  logic signed [W-1:0] x_i,
  output energy_t             psi_o
);

  logic signed [W-1:0]   x_d1, x_d2;
  logic signed [2*W-1:0] sq, prod_nn;
  logic signed [2*W:0]   psi;

  always_comb begin
    sq    = x_d1 * x_d1;
    prod_nn = x_i * x_d2;
    psi   = (2*W+1)'(sq) - (2*W+1)'(prod_nn);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_d1  <= '0;
      x_d2  <= '0;
      psi_o <= '0;
    end else begin
      x_d1  <= x_i;
      x_d2  <= x_d1;
      psi_o <= en_i ? NEO_W'(psi) : '0;
    end
  end

  initial assert (2*W+1 <= NEO_W) else $error("NEO_W too narrow for W");

endmodule
