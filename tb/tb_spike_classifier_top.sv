// tb_spike_classifier_top: end-to-end test of the spike detection, classification and
// storage pipeline (storage shortened to 16 records
// so that it fills up, threshold window shortened to 256 samples).
//
// A synthetic recording (DC offset plus uniform noise, with simple-spike and
// complex-spike shapes inserted at chosen times, some closer together than
// the pipeline's dead time) is fed one sample per clock. The classifier is
// loaded with random weights during reset; between spikes the output-layer
// biases are rewritten to steer the class, so that simple, complex and
// false-positive results all occur.
//
// A cycle-level reference model kept in this testbench (filters, energy
// operator, threshold rule, controller, reference forward pass of the
// network, record format) predicts the state of every cycle, every
// classification flag and class, and the stored records; the records are
// finally read back through the storage read-out port and compared.
// Each mechanism of the design is counted and must occur at least once:
// threshold convergence, detection, 40-sample capture, the three classes,
// discarding of F results, record writes, detections ignored while busy,
// storage full with records dropped, and storage read-out.
module tb_spike_classifier_top;
  import spike_pkg::*;
  localparam int DEPTH = 16;
  localparam int WIN   = 8;
  localparam int WARM  = 16;
  localparam int CMUL  = 8;
  localparam int AW    = $clog2(DEPTH);
  localparam int N_SPIKES = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sample_t x;
  nn_cfg_t cfg;
  logic rd_en;
  logic [AW-1:0] rd_addr;
  logic [REC_W-1:0] rd_data;
  ctrl_state_e st;
  energy_t thr;
  logic thr_valid, spk_v, full;
  spike_class_e spk_c;
  acc_t logits [3];
  ts_t sidx;
  logic [AW:0] rec_count;
  logic [31:0] dropped;

  spike_classifier_top #(.DEPTH(DEPTH), .THR_WIN(WIN)) dut (
    .clk, .rst_n, .sample_i(x), .cfg_i(cfg), .rd_en_i(rd_en), .rd_addr_i(rd_addr),
    .rd_data_o(rd_data), .state_o(st), .thr_o(thr), .thr_valid_o(thr_valid),
    .spike_valid_o(spk_v), .spike_class_o(spk_c), .spike_logits_o(logits),
    .sample_idx_o(sidx), .rec_count_o(rec_count), .full_o(full), .dropped_o(dropped));

  // ---------------- network parameters kept here ----------------
  int     W   [N_ROWS][MAX_N];
  longint B   [N_LAYERS][MAX_N];
  int     M   [N_LAYERS];
  int     S   [N_LAYERS];
  int LIN [N_LAYERS] = '{40, 16, 7, 5, 4};
  int LOUT[N_LAYERS] = '{16, 7, 5, 4, 3};
  int RB  [N_LAYERS] = '{0, 40, 56, 63, 68};

  function automatic int requant(longint a, int m, int s);
    longint p;
    p = a * longint'(m);
    if (s > 0) p = p + (longint'(1) << (s - 1));
    p = p >>> s;
    if (p < 0) return 0;
    if (p > 127) return 127;
    return int'(p);
  endfunction

  function automatic int ref_classify(input longint wv [WAVE_LEN]);
    longint xa [WAVE_LEN];
    longint acc [MAX_N];
    int best;
    for (int i = 0; i < WAVE_LEN; i++) xa[i] = wv[i];
    for (int l = 0; l < N_LAYERS; l++) begin
      for (int j = 0; j < LOUT[l]; j++) begin
        acc[j] = B[l][j];
        for (int i = 0; i < LIN[l]; i++) acc[j] += xa[i] * W[RB[l] + i][j];
      end
      if (l < N_LAYERS - 1)
        for (int j = 0; j < LOUT[l]; j++) xa[j] = longint'(requant(acc[j], M[l], S[l]));
    end
    best = 0;
    if (acc[1] > acc[best]) best = 1;
    if (acc[2] > acc[best]) best = 2;
    return best;
  endfunction

  task automatic cfg_write(input int addr, input int data);
    @(negedge clk);
    cfg.we = 1; cfg.addr = 12'(addr); cfg.data = 32'(data);
    @(negedge clk);
    cfg.we = 0;
  endtask

  // ---------------- reference model state ----------------
  longint m_xf, m_d1, m_d2, m_psi, m_tpsi, m_e, m_thr_sum, m_thr_val, m_treg;
  bit     m_det, m_thr_done, m_tvalid;
  int     m_thr_cnt, m_cap, m_nn_cnt, m_state, m_class;
  longint m_wave [WAVE_LEN];
  longint m_t, m_det_ts;
  int     m_count, m_dropped;
  logic [31:0] m_rec [$];
  bit     model_on = 0;

  // mechanism counters
  int n_conv, cnt_det, n_capture, n_fdrop, n_store, n_ignored, n_full_drop, n_readout;
  int n_cls [3];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0d: %s", m_t, what);
    end
  endtask

  task automatic model_reset();
    m_xf = 0; m_d1 = 0; m_d2 = 0; m_psi = 0; m_tpsi = 0; m_e = 0;
    m_thr_sum = 0; m_thr_val = 0; m_treg = (1 << 23) - 1;
    m_det = 0; m_thr_done = 0; m_tvalid = 0;
    m_thr_cnt = 0; m_cap = 0; m_nn_cnt = 0; m_state = 0; m_class = 0;
    m_t = 0; m_det_ts = 0; m_count = 0; m_dropped = 0;
    for (int i = 0; i < WAVE_LEN; i++) m_wave[i] = 0;
  endtask

  // one clock edge of the reference model; xin is the sample of the cycle
  task automatic model_step(input longint xin);
    longint psi_c, mean;
    longint n_xf, n_psi, n_tpsi, n_e, n_thr_val, n_treg, n_thr_sum;
    bit n_det, n_thr_done, n_tvalid;
    int n_state, n_cap, n_nn, n_thr_cnt;
    bit thr_en, neo_en;
    thr_en = (m_state == 0);
    neo_en = (m_state == 1);
    psi_c  = m_d1 * m_d1 - m_xf * m_d2;
    n_xf   = m_xf + ((xin - m_xf) >>> 1);
    n_psi  = neo_en ? psi_c : 0;
    n_tpsi = thr_en ? psi_c : 0;
    n_e    = neo_en ? m_e + ((m_psi - m_e) >>> 3) : 0;
    n_det  = neo_en && (m_e > m_treg);
    // threshold calculator
    n_thr_cnt = m_thr_cnt; n_thr_sum = m_thr_sum; n_thr_val = m_thr_val; n_thr_done = m_thr_done;
    if (thr_en && !m_thr_done) begin
      n_thr_cnt = m_thr_cnt + 1;
      if (m_thr_cnt > WARM && m_thr_cnt <= WARM + (1 << WIN)) n_thr_sum = m_thr_sum + m_tpsi;
      if (m_thr_cnt == WARM + (1 << WIN) + 1) begin
        mean = m_thr_sum >>> WIN;
        n_thr_val = (mean <= 0) ? 0 : mean * CMUL;
        if (n_thr_val > (1 << 23) - 1) n_thr_val = (1 << 23) - 1;
        n_thr_done = 1;
      end
    end
    // threshold register
    n_treg = m_treg; n_tvalid = m_tvalid;
    if (m_thr_done && !m_tvalid) begin n_treg = m_thr_val; n_tvalid = 1; end
    // controller, capture, classifier, logger
    n_state = m_state;
    case (m_state)
      0: if (m_tvalid) begin n_state = 1; n_conv++; end
      1: if (m_det) begin n_state = 2; m_det_ts = m_t; cnt_det++; end
      2: begin
           m_wave[m_cap] = m_xf >>> 2;
           if (m_cap == WAVE_LEN - 1) begin n_state = 3; n_capture++; end
         end
      3: if (m_nn_cnt == 6) begin
           n_cls[m_class]++;
           if (m_class == 0) n_fdrop++;
           else if (m_count < DEPTH) begin
             m_rec.push_back({(m_class == 2) ? 1'b1 : 1'b0, 31'(m_det_ts)});
             m_count++; n_store++;
           end else begin
             m_dropped++; n_full_drop++;
           end
           n_state = 1;
         end
      default: ;
    endcase
    n_cap = (m_state == 2) ? m_cap + 1 : 0;
    n_nn  = (m_state == 3) ? m_nn_cnt + 1 : 0;
    // commit
    m_state = n_state; m_cap = n_cap; m_nn_cnt = n_nn;
    m_d2 = m_d1; m_d1 = m_xf; m_xf = n_xf;
    m_psi = n_psi; m_tpsi = n_tpsi; m_e = n_e; m_det = n_det;
    m_thr_cnt = n_thr_cnt; m_thr_sum = n_thr_sum; m_thr_val = n_thr_val; m_thr_done = n_thr_done;
    m_treg = n_treg; m_tvalid = n_tvalid;
    m_t++;
  endtask

  always @(posedge clk) if (model_on) model_step(longint'(x));

  // compare the design with the model in the middle of every cycle
  always @(negedge clk) if (model_on) begin
    bit exp_done;
    exp_done = (m_state == 3) && (m_nn_cnt == 6);
    if (exp_done) m_class = ref_classify(m_wave);
    chk(int'(st) == m_state, $sformatf("state %0d expected %0d", st, m_state));
    chk(spk_v == exp_done, "classification flag");
    if (exp_done) chk(int'(spk_c) == m_class, $sformatf("class %0d expected %0d", spk_c, m_class));
    chk(longint'(sidx) == m_t, "sample index");
  end

  // ---------------- stimulus ----------------
  localparam int T_INIT = WARM + (1 << WIN) + 10;
  localparam int GAP    = 300;
  localparam int T_END  = T_INIT + (N_SPIKES + 2) * GAP;
  int sig [T_END];
  int ss_shape [10] = '{-60, -180, -300, -220, -100, 20, 80, 70, 40, 15};
  int cs_shape [20] = '{150, 300, 200, -100, -250, -150, 50, 120, -80, -180,
                        -60, 40, 90, -50, -120, -30, 30, 60, 10, 0};
  int spike_at [N_SPIKES];
  int pend_addr [$];
  int pend_data [$];

  initial begin
    repeat (200000 + 40 * T_END) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, st_k;
    x = 0; cfg = '0; rd_en = 0; rd_addr = '0;
    model_reset();
    for (int i = 0; i < 3; i++) n_cls[i] = 0;
    // recording: offset plus noise, then spikes
    for (int t = 0; t < T_END; t++) sig[t] = 30 + $signed($urandom_range(0, 30)) - 15;
    for (int k = 0; k < N_SPIKES; k++) begin
      spike_at[k] = T_INIT + GAP / 2 + k * GAP + ((k % 5 == 4) ? -270 : 0);
      if (k % 3 == 2) for (int i = 0; i < 20; i++) sig[spike_at[k] + i] += cs_shape[i];
      else            for (int i = 0; i < 10; i++) sig[spike_at[k] + i] += ss_shape[i];
    end
    for (int t = 0; t < T_END; t++) sig[t] = (sig[t] > 511) ? 511 : (sig[t] < -512) ? -512 : sig[t];

    // random network, loaded while the design is held in reset
    repeat (2) @(posedge clk);
    for (int r = 0; r < N_ROWS; r++)
      for (int j = 0; j < MAX_N; j++) begin
        W[r][j] = $signed($urandom_range(0, 255)) - 128;
        cfg_write(r * 16 + j, W[r][j]);
      end
    for (int l = 0; l < N_LAYERS; l++) begin
      for (int j = 0; j < MAX_N; j++) begin
        B[l][j] = longint'($signed($urandom_range(0, 1 << 17))) - (1 << 16);
        cfg_write('h800 + l * 16 + j, int'(B[l][j]));
      end
      M[l] = $urandom_range(1, 65535);
      S[l] = $urandom_range(14, 22);
      cfg_write('hC00 + l, M[l]);
      cfg_write('hC08 + l, S[l]);
    end

    @(negedge clk);
    rst_n = 1;
    model_on = 1;
    st_k = 0;
    for (int t = 0; t < T_END; t++) begin
      x = sample_t'(sig[t]);
      // steer the output class before each spike: random, SS, CS, F
      if (st_k < N_SPIKES && t == spike_at[st_k] - 100) begin
        for (int j = 0; j < 3; j++) begin
          case (st_k % 4)
            0: v = $signed($urandom_range(0, 1 << 17)) - (1 << 16);
            1: v = (j == 1) ? 1000000 : -1000000;
            2: v = (j == 2) ? 1000000 : -1000000;
            default: v = (j == 0) ? 1000000 : -1000000;
          endcase
          pend_addr.push_back('h800 + 4 * 16 + j);
          pend_data.push_back(v);
        end
      end
      if (st_k < N_SPIKES && t == spike_at[st_k]) begin
        if (m_state != 1) n_ignored++;
        st_k++;
      end
      cfg.we = 0;
      if (pend_addr.size() > 0 && m_state == 1) begin
        cfg.we = 1;
        cfg.addr = 12'(pend_addr[0]);
        cfg.data = 32'(pend_data[0]);
        B[4][pend_addr[0] - ('h800 + 64)] = longint'(pend_data[0]);
        void'(pend_addr.pop_front());
        void'(pend_data.pop_front());
      end
      @(negedge clk);
    end
    cfg.we = 0;
    x = 30;
    while (m_state != 1) @(negedge clk);
    repeat (5) @(negedge clk);

    // end state and read-out of every record
    chk(thr_valid && longint'(thr) == m_treg, $sformatf("threshold %0d expected %0d", thr, m_treg));
    chk(int'(rec_count) == m_count, $sformatf("record count %0d expected %0d", rec_count, m_count));
    chk(int'(dropped) == m_dropped, "dropped count");
    chk(full == (m_count == DEPTH), "full flag");
    for (int i = 0; i < m_count; i++) begin
      rd_en = 1; rd_addr = AW'(i);
      @(negedge clk);
      rd_en = 0;
      chk(rd_data == m_rec[i], $sformatf("record %0d = %h expected %h", i, rd_data, m_rec[i]));
      n_readout++;
    end

    $display("threshold=%0d detections=%0d captures=%0d F=%0d SS=%0d CS=%0d stored=%0d F-discarded=%0d",
             thr, cnt_det, n_capture, n_cls[0], n_cls[1], n_cls[2], n_store, n_fdrop);
    $display("spikes-while-busy=%0d full-drops=%0d readouts=%0d", n_ignored, n_full_drop, n_readout);
    chk(n_conv == 1, "threshold convergence happened");
    chk(cnt_det > 0, "detection happened");
    chk(n_capture > 0, "capture happened");
    chk(n_cls[0] > 0, "F classification happened");
    chk(n_cls[1] > 0, "SS classification happened");
    chk(n_cls[2] > 0, "CS classification happened");
    chk(n_fdrop > 0, "F discarded");
    chk(n_store > 0, "record stored");
    chk(n_ignored > 0, "spike during capture/classification ignored");
    chk(n_full_drop > 0, "storage full, records dropped");
    chk(n_readout > 0, "read-out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
