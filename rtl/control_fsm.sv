// control_fsm: the system controller.
//
// Four states, as published:
//   INIT        after reset; only the threshold calculator runs. Leaves on the
//               threshold flag.
//   RUNNING     NEO, IIR filter 2 and comparator run. Leaves on the
//               detection flag.
//   DETECTED    the next 40 filtered samples are written into the waveform
//               registers (capture index i = 0..39). Leaves when i = 40.
//   CLASSIFYING the classifier runs and the storage is enabled. Leaves on the
//               classification flag, back to RUNNING.
// No further spike can be detected between a detection and the return to
// RUNNING, which the published design allows because Purkinje-cell spikes
// are more than 2 ms apart.
//
// The enables are decoded from the state register (Moore outputs), so each
// takes effect in the first cycle of its state. Which block is enabled in
// which state follows the published description; that the NEO/filter-2
// chain is enabled only in RUNNING (and restarts from zero energy), and the
// one-hot encoding of the enables as a struct, are this design's choice.
//
// Interface: thr_flag_i, det_flag_i and cls_flag_i are the three flags;
// ctrl_o carries the enables; state_o the current state; detect_o pulses in
// the cycle the RUNNING -> DETECTED transition is taken.
module control_fsm
  import spike_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        thr_flag_i,
  input  logic        det_flag_i,
  input  logic        cls_flag_i,
  output ctrl_t       ctrl_o,
  output ctrl_state_e state_o,
  output logic        detect_o
);

  ctrl_state_e state, state_n;
  logic [5:0]  cap_i;

  always_comb begin
    state_n = state;
    unique case (state)
      ST_INIT:        if (thr_flag_i)              state_n = ST_RUNNING;
      ST_RUNNING:     if (det_flag_i)              state_n = ST_DETECTED;
      ST_DETECTED:    if (cap_i == 6'(WAVE_LEN-1)) state_n = ST_CLASSIFYING;
      ST_CLASSIFYING: if (cls_flag_i)              state_n = ST_RUNNING;
      default:                                     state_n = ST_INIT;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_INIT;
      cap_i <= '0;
    end else begin
      state <= state_n;
      if (state == ST_DETECTED) cap_i <= cap_i + 1'b1;
      else                      cap_i <= '0;
    end
  end

  always_comb begin
    ctrl_o             = '0;
    ctrl_o.thr_en      = (state == ST_INIT);
    ctrl_o.neo_en      = (state == ST_RUNNING);
    ctrl_o.capture_en  = (state == ST_DETECTED);
    ctrl_o.capture_idx = cap_i;
    ctrl_o.nn_en       = (state == ST_CLASSIFYING);
    ctrl_o.store_en    = (state == ST_CLASSIFYING);
  end

  assign state_o  = state;
  assign detect_o = (state == ST_RUNNING) && det_flag_i;

  // exactly one capture per index, in order, before classification
  a_capture_len : assert property (@(posedge clk) disable iff (!rst_n)
      (state == ST_DETECTED && state_n == ST_CLASSIFYING) |-> cap_i == 6'(WAVE_LEN-1));

endmodule
