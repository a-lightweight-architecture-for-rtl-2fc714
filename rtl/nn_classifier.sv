// nn_classifier: quantized multilayer-perceptron spike classifier.
//
// Topology [40, 16, 7, 5, 4, 3]: the 40 captured 8-bit samples feed four
// fully connected hidden layers with ReLU and a linear output layer of three
// logits (F = not a spike, SS = simple spike, CS = complex spike). The class
// is the index of the largest logit, so no softmax is needed. Weights and
// activations are signed 8-bit, accumulation is 32-bit. At the end of each
// hidden layer every accumulator is requantized to 8 bits with a per-layer
// multiplier and rounding right shift (integer-only inference):
//
//   a = clamp( (acc * MULT[l] + 2^(SHIFT[l]-1)) >>> SHIFT[l], 0, 127 )
//
// where the lower clamp is the ReLU. Zero points are taken as 0 (symmetric
// quantization). SHIFT must be below 48.
//
// Schedule: layer by layer. Each cycle takes LANES inputs of the current
// layer for all (up to 16) neurons at once, with LANES x 16 multipliers; the
// first chunk of a layer starts from the bias, and the last chunk's sum is
// requantized in the same cycle into the activation buffer (or, after the
// output layer, reduced to the argmax). A classification takes
// sum over layers of ceil(inputs/LANES) cycles, after one start cycle:
// done_o rises NN_LATENCY cycles after en_i rises. With the default
// LANES = 40 every layer takes one cycle and NN_LATENCY = 6, so that a
// detection (1 cycle), the 40-sample capture and the classification end
// within 2 ms at the 24.414 kHz sample clock, the minimum interval between
// Purkinje-cell spikes during which the published design stops detecting.
// Smaller LANES trade multipliers for cycles (LANES = 1: 77 cycles).
//
// Published: the topology, ReLU hidden layers, linear logits with argmax,
// 8-bit weights and activations, integer-only quantization, and that no
// detection is needed during the >2 ms after a spike. This design's choice:
// the schedule, the requantization form, the class order on the output
// neurons, and holding the trained parameters in writable registers instead
// of hard-wired constants (no trained values are available), so that any
// trained network of this topology can be loaded.
//
// Interface:
//   en_i      level enable from the controller; a rising edge starts one
//             classification of wave_i (which must stay stable until done_o)
//   done_o    one-cycle classification flag; class_o and logits_o valid with it
//             and held until the next classification
//   cfg_i     parameter write port (see spike_pkg::nn_cfg_t for the address
//             map); must be written before the first classification and only
//             while no classification is running
module nn_classifier
  import spike_pkg::*;
#(
  parameter int LANES = 40   // layer inputs processed per cycle (1..40)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en_i,
  input  act_t         wave_i [WAVE_LEN],
  input  nn_cfg_t      cfg_i,
  output logic         done_o,
  output spike_class_e class_o,
  output acc_t         logits_o [3]
);

  // trained parameters
  act_t        w_mem  [N_ROWS][MAX_N];
  acc_t        b_mem  [N_LAYERS][MAX_N];
  logic [15:0] m_mem  [N_LAYERS];
  logic [5:0]  s_mem  [N_LAYERS];

  // datapath state
  act_t        h_buf  [MAX_N];      // input activations of layers 1..4
  acc_t        acc    [MAX_N];
  logic        busy, en_d;
  logic [2:0]  layer;
  logic [5:0]  base;                // first layer input of the current chunk
  logic        last_chunk;

  act_t        x_lane   [LANES];
  act_t        w_lane   [LANES][MAX_N];
  acc_t        acc_next [MAX_N];
  act_t        act_next [MAX_N];
  spike_class_e best;

  function automatic act_t requant(input acc_t a, input logic [15:0] m,
                                   input logic [5:0] s);
    logic signed [48:0] prod;
    logic signed [48:0] rnd;
    prod = 49'(a) * $signed({33'd0, m});
    rnd  = (s == 0) ? '0 : (49'sd1 <<< (s - 6'd1));
    prod = (prod + rnd) >>> s;
    if (prod < 0)          return '0;           // ReLU
    else if (prod > 127)   return 8'sd127;
    else                   return act_t'(prod);
  endfunction

  // operands of the current chunk; inputs past the end of the layer are zero
  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      int idx, row;
      idx = int'(base) + k;
      row = ROW_BASE[layer] + idx;
      if (idx < LAYER_IN[layer]) begin
        x_lane[k] = (layer == 3'd0) ? wave_i[idx] : h_buf[idx % MAX_N];
        for (int j = 0; j < MAX_N; j++) w_lane[k][j] = w_mem[row % N_ROWS][j];
      end else begin
        x_lane[k] = '0;
        for (int j = 0; j < MAX_N; j++) w_lane[k][j] = '0;
      end
    end
  end

  always_comb begin
    last_chunk = (int'(base) + LANES >= LAYER_IN[layer]);
    for (int j = 0; j < MAX_N; j++) begin
      acc_next[j] = (base == 6'd0) ? b_mem[layer][j] : acc[j];
      for (int k = 0; k < LANES; k++)
        acc_next[j] = acc_next[j] + acc_t'(x_lane[k] * w_lane[k][j]);
      act_next[j] = (j < LAYER_OUT[layer]) ? requant(acc_next[j], m_mem[layer], s_mem[layer])
                                            : '0;
    end
    best = CLS_FALSE;
    if (acc_next[1] > acc_next[0]) best = CLS_SIMPLE;
    if (acc_next[2] > acc_next[(best == CLS_SIMPLE) ? 1 : 0]) best = CLS_COMPLEX;
  end

  // parameter writes
  always_ff @(posedge clk) begin
    if (cfg_i.we) begin
      if (cfg_i.addr < 12'(N_ROWS * MAX_N))
        w_mem[cfg_i.addr[10:4]][cfg_i.addr[3:0]] <= act_t'(cfg_i.data[7:0]);
      else if (cfg_i.addr >= CFG_BIAS_BASE && cfg_i.addr < CFG_BIAS_BASE + 12'(N_LAYERS * MAX_N))
        b_mem[cfg_i.addr[6:4]][cfg_i.addr[3:0]] <= acc_t'(cfg_i.data);
      else if (cfg_i.addr >= CFG_MULT_BASE && cfg_i.addr < CFG_MULT_BASE + 12'(N_LAYERS))
        m_mem[cfg_i.addr[2:0]] <= cfg_i.data[15:0];
      else if (cfg_i.addr >= CFG_SHIFT_BASE && cfg_i.addr < CFG_SHIFT_BASE + 12'(N_LAYERS))
        s_mem[3'(cfg_i.addr - CFG_SHIFT_BASE)] <= cfg_i.data[5:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      en_d    <= 1'b0;
      layer   <= '0;
      base    <= '0;
      done_o  <= 1'b0;
      class_o <= CLS_FALSE;
      for (int j = 0; j < MAX_N; j++) begin
        acc[j]   <= '0;
        h_buf[j] <= '0;
      end
      for (int k = 0; k < 3; k++) logits_o[k] <= '0;
    end else begin
      en_d   <= en_i;
      done_o <= 1'b0;
      if (!busy) begin
        if (en_i && !en_d) begin
          busy  <= 1'b1;
          layer <= '0;
          base  <= '0;
        end
      end else if (!last_chunk) begin
        for (int j = 0; j < MAX_N; j++) acc[j] <= acc_next[j];
        base <= base + 6'(LANES);
      end else begin
        base <= '0;
        if (layer == 3'(N_LAYERS - 1)) begin
          busy    <= 1'b0;
          done_o  <= 1'b1;
          class_o <= best;
          for (int k = 0; k < 3; k++) logits_o[k] <= acc_next[k];
        end else begin
          for (int j = 0; j < MAX_N; j++) h_buf[j] <= act_next[j];
          layer <= layer + 1'b1;
        end
      end
    end
  end

  initial assert (LANES >= 1 && LANES <= WAVE_LEN) else $error("LANES out of range");

endmodule
