// tb_nn_classifier: loads random weights, biases and requantization
// constants through the configuration port, classifies random 40-sample
// waveforms and compares class and the three logits with a reference
// forward pass of the [40,16,7,5,4,3] network computed here in 64-bit
// integers. Two instances run side by side: the default one (40 lanes, one
// layer per cycle) and one with 7 lanes (layers split into chunks). Checks
// the latency of each (6 and 13 cycles from enable to classification flag),
// that each of the three classes occurs, and that holding the enable high
// does not start a second classification.
module tb_nn_classifier;
  import spike_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int seen [3];

  logic en, done;
  act_t wave [WAVE_LEN];
  nn_cfg_t cfg;
  spike_class_e cls, cls7;
  acc_t logits [3], logits7 [3];
  logic done7;

  int W   [N_ROWS][MAX_N];
  longint B [N_LAYERS][MAX_N];
  int M   [N_LAYERS];
  int S   [N_LAYERS];
  int LIN [N_LAYERS] = '{40, 16, 7, 5, 4};
  int LOUT[N_LAYERS] = '{16, 7, 5, 4, 3};
  int RB  [N_LAYERS] = '{0, 40, 56, 63, 68};

  nn_classifier dut (.clk, .rst_n, .en_i(en), .wave_i(wave), .cfg_i(cfg),
                     .done_o(done), .class_o(cls), .logits_o(logits));
  nn_classifier #(.LANES(7)) dut7 (.clk, .rst_n, .en_i(en), .wave_i(wave), .cfg_i(cfg),
                     .done_o(done7), .class_o(cls7), .logits_o(logits7));

  task automatic cfg_write(input int addr, input int data);
    @(negedge clk);
    cfg.we = 1; cfg.addr = 12'(addr); cfg.data = 32'(data);
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic load_params(input int out_bias_class);
    for (int r = 0; r < N_ROWS; r++)
      for (int j = 0; j < MAX_N; j++) begin
        W[r][j] = $signed($urandom_range(0, 255)) - 128;
        cfg_write(r * 16 + j, W[r][j]);
      end
    for (int l = 0; l < N_LAYERS; l++) begin
      for (int j = 0; j < MAX_N; j++) begin
        B[l][j] = longint'($signed($urandom_range(0, 1 << 17))) - (1 << 16);
        if (l == N_LAYERS - 1 && out_bias_class >= 0)
          B[l][j] = (j == out_bias_class) ? 1000000 : -1000000;
        cfg_write('h800 + l * 16 + j, int'(B[l][j]));
      end
      M[l] = $urandom_range(1, 65535);
      S[l] = $urandom_range(14, 24);
      cfg_write('hC00 + l, M[l]);
      cfg_write('hC08 + l, S[l]);
    end
  endtask

  function automatic int requant(longint a, int m, int s);
    longint p;
    p = a * longint'(m);
    if (s > 0) p = p + (longint'(1) << (s - 1));
    p = p >>> s;
    if (p < 0) return 0;
    if (p > 127) return 127;
    return int'(p);
  endfunction

  task automatic classify_and_check();
    longint x [MAX_N * 3];
    longint acc [MAX_N];
    int best, lat, lat7;
    for (int i = 0; i < WAVE_LEN; i++) x[i] = longint'(wave[i]);
    for (int l = 0; l < N_LAYERS; l++) begin
      for (int j = 0; j < LOUT[l]; j++) begin
        acc[j] = B[l][j];
        for (int i = 0; i < LIN[l]; i++) acc[j] += x[i] * W[RB[l] + i][j];
      end
      if (l < N_LAYERS - 1)
        for (int j = 0; j < LOUT[l]; j++) x[j] = longint'(requant(acc[j], M[l], S[l]));
    end
    best = 0;
    if (acc[1] > acc[best]) best = 1;
    if (acc[2] > acc[best]) best = 2;

    @(negedge clk);
    en = 1;
    lat = 0; lat7 = 0;
    for (int c = 1; c <= 60; c++) begin
      @(posedge clk); #1;
      if (done  && lat  == 0) lat  = c;
      if (done7 && lat7 == 0) lat7 = c;
    end
    checks += 2;
    if (lat != 6)   begin failures++; $display("latency %0d, expected 6", lat); end
    if (lat7 != 13) begin failures++; $display("7-lane latency %0d, expected 13", lat7); end
    checks += 2;
    if (int'(cls) != best)  begin failures++; $display("class %0d expected %0d", cls, best); end
    if (int'(cls7) != best) begin failures++; $display("7-lane class %0d expected %0d", cls7, best); end
    for (int k = 0; k < 3; k++) begin
      checks += 2;
      if (longint'(logits[k]) != acc[k]) begin
        failures++; $display("logit %0d = %0d expected %0d", k, logits[k], acc[k]);
      end
      if (longint'(logits7[k]) != acc[k]) begin
        failures++; $display("7-lane logit %0d = %0d expected %0d", k, logits7[k], acc[k]);
      end
    end
    seen[best]++;
    // enable held high: no restart
    repeat (40) begin
      @(posedge clk); #1;
      if (done || done7) begin failures++; $display("restarted while enable held"); end
    end
    checks++;
    @(negedge clk);
    en = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; cfg = '0;
    for (int i = 0; i < WAVE_LEN; i++) wave[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 4; set++) begin
      load_params(set < 3 ? set : -1);
      for (int t = 0; t < 8; t++) begin
        for (int i = 0; i < WAVE_LEN; i++) wave[i] = act_t'($urandom);
        classify_and_check();
      end
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("class %0d never produced", k); end
    end
    $display("classes seen: F=%0d SS=%0d CS=%0d", seen[0], seen[1], seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
