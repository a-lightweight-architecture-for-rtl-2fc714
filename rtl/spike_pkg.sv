// spike_pkg: types and constants shared by the Purkinje-cell spike
// detection/classification pipeline.
//
// Sample and energy widths, the classifier topology [40,16,7,5,4,3], the
// controller states and the spike classes live here so that every block and
// testbench agrees on them. The 10-bit sample width, the 40-sample waveform,
// the 8-bit activations and the layer sizes are the published numbers; the
// remaining widths (energy, accumulator, timestamp) are this design's choice,
// sized so that nothing can overflow for 10-bit inputs.
package spike_pkg;

  // ADC resolution (10 bits, signed two's complement)
  localparam int SAMPLE_W = 10;
  // width of the NEO energy and of the threshold (signed)
  localparam int NEO_W    = 24;
  // samples captured after a detection
  localparam int WAVE_LEN = 40;
  // quantized activations and weights
  localparam int ACT_W    = 8;
  // classifier accumulator
  localparam int ACC_W    = 32;
  // sample-index (timestamp) width of a stored record
  localparam int TS_W     = 31;
  // stored record width: {spike type bit, sample index}
  localparam int REC_W    = 32;

  // classifier topology: inputs, four hidden layers, three outputs
  localparam int N_LAYERS = 5;
  localparam int MAX_N    = 16;            // widest layer after the input
  localparam int LAYER_IN  [N_LAYERS] = '{40, 16, 7, 5, 4};
  localparam int LAYER_OUT [N_LAYERS] = '{16,  7, 5, 4, 3};
  // first weight row of each layer (one row per layer input, MAX_N weights)
  localparam int ROW_BASE  [N_LAYERS] = '{0, 40, 56, 63, 68};
  localparam int N_ROWS    = 72;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [NEO_W-1:0]    energy_t;
  typedef logic signed [ACT_W-1:0]    act_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic        [TS_W-1:0]     ts_t;

  // output-neuron order of the classifier
  typedef enum logic [1:0] {
    CLS_FALSE   = 2'd0,   // F: detection that is not a spike
    CLS_SIMPLE  = 2'd1,   // SS
    CLS_COMPLEX = 2'd2    // CS
  } spike_class_e;

  typedef enum logic [1:0] {
    ST_INIT        = 2'd0,
    ST_RUNNING     = 2'd1,
    ST_DETECTED    = 2'd2,
    ST_CLASSIFYING = 2'd3
  } ctrl_state_e;

  // enables the controller drives into the datapath
  typedef struct packed {
    logic       thr_en;      // threshold calculator
    logic       neo_en;      // NEO calculator, IIR filter 2, comparator
    logic       capture_en;  // waveform registers
    logic [5:0] capture_idx; // register written this cycle
    logic       nn_en;       // classifier
    logic       store_en;    // storage power/enable
  } ctrl_t;

  // classifier configuration write port (weights, biases, requantization)
  //   addr 0x000-0x47F : weight, row*16 + column (row = ROW_BASE[l] + input)
  //   addr 0x800-0x84F : bias, 0x800 + layer*16 + neuron (32-bit)
  //   addr 0xC00-0xC04 : requantization multiplier of a layer (16 bits)
  //   addr 0xC08-0xC0C : requantization right shift of a layer (6 bits)
  typedef struct packed {
    logic        we;
    logic [11:0] addr;
    logic [31:0] data;
  } nn_cfg_t;

  localparam logic [11:0] CFG_BIAS_BASE  = 12'h800;
  localparam logic [11:0] CFG_MULT_BASE  = 12'hC00;
  localparam logic [11:0] CFG_SHIFT_BASE = 12'hC08;

endpackage
