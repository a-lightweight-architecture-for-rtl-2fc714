// tb_spike_comparator: random energies and thresholds (signed, with ties)
// and a random enable; checks every cycle that the flag is the registered
// value of enable AND energy > threshold.
module tb_spike_comparator;
  import spike_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fired = 0;
  logic en, det;
  energy_t e, t;
  bit exp_det;

  spike_comparator dut (.clk, .rst_n, .en_i(en), .energy_i(e), .thr_i(t), .det_o(det));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; e = 0; t = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = $urandom_range(0, 3) != 0;
      t  = energy_t'($urandom_range(0, 1000));
      case ($urandom_range(0, 3))
        0: e = t;
        1: e = t + 1;
        2: e = -energy_t'($urandom_range(0, 1000));
        default: e = energy_t'($urandom_range(0, 2000));
      endcase
      exp_det = en && (longint'(e) > longint'(t));
      @(posedge clk); #1;
      checks++;
      if (det != exp_det) begin
        failures++;
        if (failures < 10) $display("mismatch e=%0d t=%0d en=%0d det=%0d", e, t, en, det);
      end
      if (det) fired++;
    end
    checks++;
    if (fired == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
