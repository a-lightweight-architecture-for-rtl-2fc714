// tb_threshold_calc: feeds a noisy signal with a DC offset to the threshold
// calculator (window shortened to 64 samples) and checks the threshold
// against mean-NEO-times-8 computed here from the same samples, the cycle in
// which the flag rises, that the result then holds, and that a run whose
// input is constant (zero energy) yields a zero threshold.
module tb_threshold_calc;
  import spike_pkg::*;
  localparam int WIN = 6, WARM = 4, C = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  sample_t x;
  energy_t thr;
  logic done;
  longint xs [0:200];

  threshold_calc #(.WIN_LOG2(WIN), .WARMUP(WARM), .C_MULT(C)) dut (
    .clk, .rst_n, .en_i(en), .x_i(x), .thr_o(thr), .done_o(done));

  function automatic longint xv(int k);
    return (k < 0) ? 0 : xs[k];
  endfunction

  task automatic run(input bit constant, input int amp);
    longint sum, mean, exp_thr;
    int rise;
    rst_n = 0; en = 0; x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k <= 200; k++)
      xs[k] = constant ? 100 : 40 + $signed($urandom_range(0, 2 * amp)) - amp;
    sum = 0;
    for (int k = WARM; k < WARM + (1 << WIN); k++)
      sum += xv(k - 1) * xv(k - 1) - xv(k) * xv(k - 2);
    mean = sum >>> WIN;
    exp_thr = (mean <= 0) ? 0 : mean * C;
    if (exp_thr > (1 << 23) - 1) exp_thr = (1 << 23) - 1;
    rise = -1;
    for (int c = 0; c < 150; c++) begin
      @(negedge clk);
      en = 1;
      x = sample_t'(xs[c]);
      if (done && rise < 0) rise = c;
      @(posedge clk);
    end
    checks++;
    if (rise != WARM + (1 << WIN) + 2) begin
      failures++; $display("flag rose at %0d, expected %0d", rise, WARM + (1 << WIN) + 2);
    end
    checks++;
    if (longint'(thr) != exp_thr) begin
      failures++; $display("threshold %0d expected %0d", thr, exp_thr);
    end
    checks++;
    if (!done) failures++;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(0, 60);
    run(0, 200);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
