// tb_neo_calc: drives random 10-bit samples (including full-scale values)
// with a random enable and checks every cycle that the registered output is
// x[n-1]^2 - x[n]*x[n-2] when enabled and zero when disabled, and that a
// constant input gives zero energy.
module tb_neo_calc;
  import spike_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  sample_t x;
  energy_t psi;
  longint h0, h1, h2, exp_psi;

  neo_calc dut (.clk, .rst_n, .en_i(en), .x_i(x), .psi_o(psi));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; x = 0; h1 = 0; h2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      case ($urandom_range(0, 3))
        0: x = 10'sd511;
        1: x = -10'sd512;
        default: x = sample_t'($urandom);
      endcase
      if (n >= 3000) x = 10'sd300;          // constant input
      h0 = longint'(x);
      exp_psi = en ? (h1 * h1 - h0 * h2) : 0;
      @(posedge clk); #1;
      checks++;
      if (longint'(psi) != exp_psi) begin
        failures++;
        if (failures < 10) $display("NEO mismatch n=%0d got %0d exp %0d", n, psi, exp_psi);
      end
      if (n >= 3003 && en) begin
        checks++;
        if (psi != 0) failures++;
      end
      h2 = h1; h1 = h0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
