// tb_control_fsm: drives the three flags and checks the state sequence
// INIT -> RUNNING -> DETECTED -> CLASSIFYING -> RUNNING, the enables of each
// state, that DETECTED lasts exactly 40 cycles with capture indices 0..39 in
// order, that a detection flag outside RUNNING is ignored, and that the
// controller waits in CLASSIFYING for the classification flag.
module tb_control_fsm;
  import spike_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic thr_f, det_f, cls_f, detect;
  ctrl_t ctrl;
  ctrl_state_e st;

  control_fsm dut (.clk, .rst_n, .thr_flag_i(thr_f), .det_flag_i(det_f), .cls_flag_i(cls_f),
                   .ctrl_o(ctrl), .state_o(st), .detect_o(detect));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s (state %s)", $time, what, st.name()); end
  endtask

  task automatic chk_enables();
    chk(ctrl.thr_en     == (st == ST_INIT),        "thr_en");
    chk(ctrl.neo_en     == (st == ST_RUNNING),     "neo_en");
    chk(ctrl.capture_en == (st == ST_DETECTED),    "capture_en");
    chk(ctrl.nn_en      == (st == ST_CLASSIFYING), "nn_en");
    chk(ctrl.store_en   == (st == ST_CLASSIFYING), "store_en");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    thr_f = 0; det_f = 0; cls_f = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // INIT holds until the threshold flag, detections ignored there
    repeat (5) begin
      @(negedge clk); det_f = 1; cls_f = 1;
      chk(st == ST_INIT, "stays in INIT"); chk_enables();
      chk(!detect, "no detect in INIT");
    end
    det_f = 0; cls_f = 0; thr_f = 1;
    @(negedge clk);
    chk(st == ST_RUNNING, "INIT -> RUNNING on threshold flag");
    for (int spike = 0; spike < 3; spike++) begin
      repeat (4) begin
        @(negedge clk);
        chk(st == ST_RUNNING, "RUNNING holds without detection"); chk_enables();
      end
      det_f = 1;
      #1 chk(detect, "detect pulse");
      @(negedge clk);
      det_f = (spike == 1);          // flag that stays high must be ignored
      for (int i = 0; i < WAVE_LEN; i++) begin
        chk(st == ST_DETECTED, "in DETECTED"); chk_enables();
        chk(ctrl.capture_idx == 6'(i), "capture index");
        chk(!detect, "no detect while capturing");
        @(negedge clk);
      end
      det_f = 0;
      repeat (10 + spike * 30) begin
        chk(st == ST_CLASSIFYING, "waits in CLASSIFYING"); chk_enables();
        @(negedge clk);
      end
      cls_f = 1;
      @(negedge clk);
      cls_f = 0;
      chk(st == ST_RUNNING, "CLASSIFYING -> RUNNING on classification flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
