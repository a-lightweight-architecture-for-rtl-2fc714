// spike_classifier_top: real-time Purkinje-cell spike detection,
// classification and storage for a single recording channel.
//
// Dataflow (one 10-bit sample per clock at the 24.414 kHz sampling rate):
//
//   sample_i -> IIR filter 1 -+-> NEO -> IIR filter 2 -> comparator -> detection flag
//                             +-> threshold calculator -> threshold register ^
//                             +-> waveform registers (40 x 8 bit) -> NN classifier
//   NN classifier -> spike type -> storage logger -> STT-RAM
//
// The control FSM (INIT, RUNNING, DETECTED, CLASSIFYING) enables the blocks:
// the threshold is learned once after reset, then the NEO chain looks for a
// spike; a detection freezes detection, captures the next 40 filtered
// samples and runs the classifier, whose simple/complex result is written
// to the storage with the sample index of the detection.
//
// Latencies in clock cycles: detection flag 4 cycles after the sample that
// crossed the threshold; capture 40 cycles; classification 6 cycles (with
// the default 40 classifier lanes); storage write in the cycle of the
// classification flag. From a detection the pipeline is back in RUNNING
// after 1 + 40 + 6 = 47 cycles (1.93 ms), inside the 2 ms during which the
// published design does not look for another spike.
//
// The block structure, the state machine, the 40-sample capture, the
// classifier topology and the STT-RAM storage follow the published design.
// The filter constants, the threshold rule, the record format, the classifier
// parameter port (cfg_i) and the storage read-out port (rd_*) are this
// design's choices; see the individual modules.
//
// Interface:
//   sample_i        ADC sample, read every clock
//   cfg_i           classifier weight/bias/requantization writes
//   rd_en_i/rd_addr_i/rd_data_o
//                   storage read-out (data one cycle after the request);
//                   a record write in the same cycle takes precedence
//   state_o, thr_*, spike_*, rec_count_o, full_o, dropped_o
//                   status: the state, the learned threshold, the
//                   classification flag and class, the stored record count
//   spike_logits_o  the three output-layer accumulators of the last
//                   classification (F, SS, CS)
//   sample_idx_o    the running sample index that timestamps the records
module spike_classifier_top
  import spike_pkg::*;
#(
  parameter int DEPTH      = 8388608,  // storage words (32 MB)
  parameter int IIR1_K     = 1,        // filter 1: alpha = 1/2
  parameter int IIR2_K     = 3,        // filter 2: alpha = 1/8
  parameter int THR_WIN    = 12,       // threshold averaging window, log2 samples
  parameter int THR_WARMUP = 16,
  parameter int THR_C      = 8,
  parameter int NN_LANES   = 40,       // classifier inputs per cycle
  localparam int AW        = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  sample_t          sample_i,
  input  nn_cfg_t          cfg_i,
  input  logic             rd_en_i,
  input  logic [AW-1:0]    rd_addr_i,
  output logic [REC_W-1:0] rd_data_o,
  output ctrl_state_e      state_o,
  output energy_t          thr_o,
  output logic             thr_valid_o,
  output logic             spike_valid_o,
  output spike_class_e     spike_class_o,
  output acc_t             spike_logits_o [3],
  output ts_t              sample_idx_o,
  output logic [AW:0]      rec_count_o,
  output logic             full_o,
  output logic [31:0]      dropped_o
);

  ctrl_t          ctrl;
  sample_t        x_f;
  energy_t        psi, energy, thr_calc;
  logic           thr_done, det_flag, detect;
  act_t           wave [WAVE_LEN];
  logic           cls_done;
  spike_class_e   cls;
  logic           mem_we;
  logic [AW-1:0]  mem_waddr;
  logic [REC_W-1:0] mem_wdata;

  // ---------------- detector ----------------
  iir_exp_filter #(.W(SAMPLE_W), .K(IIR1_K), .CLEAR_WHEN_OFF(1'b0)) u_iir1 (
    .clk(clk), .rst_n(rst_n), .en_i(1'b1), .x_i(sample_i), .y_o(x_f));

  threshold_calc #(.W(SAMPLE_W), .WIN_LOG2(THR_WIN), .WARMUP(THR_WARMUP), .C_MULT(THR_C)) u_thr (
    .clk(clk), .rst_n(rst_n), .en_i(ctrl.thr_en), .x_i(x_f), .thr_o(thr_calc), .done_o(thr_done));

  threshold_register u_thr_reg (
    .clk(clk), .rst_n(rst_n), .load_i(thr_done), .thr_i(thr_calc),
    .thr_o(thr_o), .valid_o(thr_valid_o));

  neo_calc #(.W(SAMPLE_W)) u_neo (
    .clk(clk), .rst_n(rst_n), .en_i(ctrl.neo_en), .x_i(x_f), .psi_o(psi));

  iir_exp_filter #(.W(NEO_W), .K(IIR2_K), .CLEAR_WHEN_OFF(1'b1)) u_iir2 (
    .clk(clk), .rst_n(rst_n), .en_i(ctrl.neo_en), .x_i(psi), .y_o(energy));

  spike_comparator u_cmp (
    .clk(clk), .rst_n(rst_n), .en_i(ctrl.neo_en), .energy_i(energy), .thr_i(thr_o),
    .det_o(det_flag));

  // ---------------- control ----------------
  control_fsm u_fsm (
    .clk(clk), .rst_n(rst_n), .thr_flag_i(thr_valid_o), .det_flag_i(det_flag),
    .cls_flag_i(cls_done), .ctrl_o(ctrl), .state_o(state_o), .detect_o(detect));

  // ---------------- classifier ----------------
  waveform_buffer u_regs (
    .clk(clk), .rst_n(rst_n), .we_i(ctrl.capture_en), .idx_i(ctrl.capture_idx),
    .x_i(x_f), .wave_o(wave));

  nn_classifier #(.LANES(NN_LANES)) u_nn (
    .clk(clk), .rst_n(rst_n), .en_i(ctrl.nn_en), .wave_i(wave), .cfg_i(cfg_i),
    .done_o(cls_done), .class_o(cls), .logits_o(spike_logits_o));

  assign spike_valid_o = cls_done;
  assign spike_class_o = cls;

  // ---------------- storage ----------------
  spike_logger #(.DEPTH(DEPTH)) u_log (
    .clk(clk), .rst_n(rst_n), .detect_i(detect), .cls_valid_i(cls_done), .cls_i(cls),
    .store_en_i(ctrl.store_en), .mem_we_o(mem_we), .mem_addr_o(mem_waddr),
    .mem_wdata_o(mem_wdata), .count_o(rec_count_o), .dropped_o(dropped_o),
    .full_o(full_o), .sample_idx_o(sample_idx_o));

  stt_ram #(.DEPTH(DEPTH), .DW(REC_W)) u_stt (
    .clk(clk), .en_i(ctrl.store_en || rd_en_i), .we_i(mem_we),
    .addr_i(mem_we ? mem_waddr : rd_addr_i), .wdata_i(mem_wdata), .rdata_o(rd_data_o));

endmodule
