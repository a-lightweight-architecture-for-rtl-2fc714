// tb_threshold_register: checks the reset value (largest positive energy,
// not valid), loading on the first flag, and that later flags or new
// calculator values do not change the held threshold.
module tb_threshold_register;
  import spike_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic load, valid;
  energy_t thr_in, thr_out;

  threshold_register dut (.clk, .rst_n, .load_i(load), .thr_i(thr_in), .thr_o(thr_out), .valid_o(valid));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; thr_in = 24'sd1234;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!valid, "valid after reset");
    chk(thr_out == 24'sh7FFFFF, "reset value");
    repeat (3) @(negedge clk);
    chk(thr_out == 24'sh7FFFFF, "no load without flag");
    thr_in = 24'sd4321; load = 1;
    @(negedge clk);
    chk(valid, "valid after load");
    chk(thr_out == 24'sd4321, "loaded value");
    thr_in = 24'sd99;
    repeat (4) @(negedge clk);
    chk(thr_out == 24'sd4321, "held while flag stays high");
    load = 0; @(negedge clk); load = 1; thr_in = 24'sd7; @(negedge clk);
    chk(thr_out == 24'sd4321, "held on later flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
