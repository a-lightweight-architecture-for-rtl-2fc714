// tb_waveform_buffer: captures three random 40-sample waveforms (with
// full-scale values) through the indexed write port and checks every
// register against sample >>> 2; also checks that nothing is written while
// the write enable is low.
module tb_waveform_buffer;
  import spike_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [5:0] idx;
  sample_t x;
  act_t wave [WAVE_LEN];
  int ref_w [WAVE_LEN];

  waveform_buffer dut (.clk, .rst_n, .we_i(we), .idx_i(idx), .x_i(x), .wave_o(wave));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; idx = 0; x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < WAVE_LEN; i++) begin
        @(negedge clk);
        we = 1; idx = 6'(i);
        x = (i == 0) ? -10'sd512 : (i == 1) ? 10'sd511 : sample_t'($urandom);
        ref_w[i] = int'(x);
        ref_w[i] = (ref_w[i] < 0) ? -((-ref_w[i] + 3) / 4) : ref_w[i] / 4;   // floor division by 4
      end
      @(negedge clk);
      we = 0; x = 10'sd200; idx = 0;
      repeat (3) @(negedge clk);
      for (int i = 0; i < WAVE_LEN; i++) begin
        checks++;
        if (int'(wave[i]) != ref_w[i]) begin
          failures++;
          if (failures < 10) $display("reg %0d got %0d exp %0d", i, wave[i], ref_w[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
