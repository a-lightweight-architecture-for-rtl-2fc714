// spike_logger: writes the classified spikes into the non-volatile storage.
//
// A free-running counter numbers the input samples (one per clock since
// reset). On a detection the logger latches the current sample index; when
// the classifier reports its result and the storage is enabled it writes one
// 32-bit record to the next free storage word:
//
//   record[31]   spike type, 0 = simple (SS), 1 = complex (CS)
//   record[30:0] sample index of the detection (wraps after 2^31 samples,
//                24.4 hours at 24.414 kHz)
//
// Detections classified as F (not a spike) are not stored. When all DEPTH
// words are written, full_o is set and further records are counted in
// dropped_o instead of written. Published is that the spike time and type
// (a sample index and a spike type per entry) are stored; the record layout,
// the dropping of F results and the full behaviour are this design's choice.
//
// Interface: detect_i pulses at the detection; cls_valid_i/cls_i is the
// classification flag and class; mem_* is a single write port to the
// storage, driven combinationally in the cycle of the classification flag
// (mem_we_o high for that one cycle per record).
module spike_logger
  import spike_pkg::*;
#(
  parameter int DEPTH = 8388608,          // storage words (32 MB of 32-bit records)
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               detect_i,
  input  logic               cls_valid_i,
  input  spike_class_e       cls_i,
  input  logic               store_en_i,
  output logic               mem_we_o,
  output logic [AW-1:0]      mem_addr_o,
  output logic [REC_W-1:0]   mem_wdata_o,
  output logic [AW:0]        count_o,     // records written
  output logic [31:0]        dropped_o,   // records lost because storage was full
  output logic               full_o,
  output ts_t                sample_idx_o
);

  ts_t sample_cnt, det_ts;
  logic store;

  assign store        = cls_valid_i && store_en_i && (cls_i != CLS_FALSE);
  assign mem_we_o     = store && !full_o;
  assign mem_addr_o   = AW'(count_o);
  assign mem_wdata_o  = {cls_i == CLS_COMPLEX, det_ts};
  assign full_o       = (count_o == (AW+1)'(DEPTH));
  assign sample_idx_o = sample_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_cnt  <= '0;
      det_ts      <= '0;
      count_o     <= '0;
      dropped_o   <= '0;
    end else begin
      sample_cnt <= sample_cnt + 1'b1;
      if (detect_i) det_ts <= sample_cnt;
      if (store) begin
        if (!full_o) begin
          count_o   <= count_o + 1'b1;
        end else begin
          dropped_o <= dropped_o + 1'b1;
        end
      end
    end
  end

endmodule
