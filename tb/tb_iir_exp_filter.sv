// tb_iir_exp_filter: checks the exponential IIR filter in both of its uses:
// a 10-bit filter with alpha = 1/2 that holds its state while disabled (IIR
// filter 1), and a 24-bit filter with alpha = 1/4 that clears while
// disabled (IIR filter 2). Random inputs and random enables; every cycle
// the outputs are compared with y += (x - y) >> K computed in integer
// arithmetic here.
module tb_iir_exp_filter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en1, en2;
  logic signed [9:0]  x1, y1;
  logic signed [23:0] x2, y2;
  longint r1, r2;

  iir_exp_filter #(.W(10), .K(1), .CLEAR_WHEN_OFF(1'b0)) dut1 (.clk, .rst_n, .en_i(en1), .x_i(x1), .y_o(y1));
  iir_exp_filter #(.W(24), .K(2), .CLEAR_WHEN_OFF(1'b1)) dut2 (.clk, .rst_n, .en_i(en2), .x_i(x2), .y_o(y2));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en1 = 0; en2 = 0; x1 = 0; x2 = 0; r1 = 0; r2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      en1 = ($urandom_range(0, 9) != 0);
      en2 = ($urandom_range(0, 9) != 0);
      x1  = 10'($urandom);
      x2  = (n < 2500) ? 24'($signed($urandom_range(0, 1 << 20))) : 24'($urandom);
      // reference update for the coming edge
      if (en1) r1 = r1 + ((longint'(x1) - r1) >>> 1);
      if (en2) r2 = r2 + ((longint'(x2) - r2) >>> 2);
      else     r2 = 0;
      @(posedge clk); #1;
      checks += 2;
      if (longint'(y1) != r1) begin
        failures++;
        if (failures < 10) $display("IIR1 mismatch n=%0d got %0d exp %0d", n, y1, r1);
      end
      if (longint'(y2) != r2) begin
        failures++;
        if (failures < 10) $display("IIR2 mismatch n=%0d got %0d exp %0d", n, y2, r2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
