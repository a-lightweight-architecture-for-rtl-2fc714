// threshold_calc: automatic detection-threshold calculator.
//
// While enabled (controller state INIT) it runs its own NEO on the filtered
// samples, discards the first WARMUP energies (filter and delay-line
// start-up), then averages the next 2^WIN_LOG2 energies and sets
//
//   threshold = C_MULT * mean(psi)          (saturated to the energy width)
//
// after which it raises done_o ("threshold flag") and holds both outputs until
// reset. A threshold that scales with the mean NEO energy of the background
// follows the noise level of the recording. Published is only that the
// calculator derives the threshold from the filtered signal on its own and
// signals convergence with a flag; the mean-times-constant rule, the window
// length and the constant are this design's choice.
//
// Interface: one filtered sample x_i per clock while en_i is high; done_o
// rises WARMUP + 2^WIN_LOG2 + 2 enabled cycles after en_i first goes high.
module threshold_calc
  import spike_pkg::*;
#(
  parameter int W        = SAMPLE_W,
  parameter int WIN_LOG2 = 12,  // averaging window 4096 samples (168 ms)
  parameter int WARMUP   = 16,  // energies ignored before averaging starts
  parameter int C_MULT   = 8    // threshold = C_MULT * mean energy
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en_i,
  input  logic signed [W-1:0] x_i,
  output energy_t             thr_o,
  output logic                done_o
);

  localparam int SUM_W = NEO_W + WIN_LOG2 + 1;
  localparam int CNT_W = $clog2(WARMUP + (1 << WIN_LOG2) + 2) + 1;
  localparam longint THR_MAX = (longint'(1) << (NEO_W - 1)) - 1;

  energy_t                   psi;
  logic signed [SUM_W-1:0]   sum;
  logic        [CNT_W-1:0]   cnt;
  logic signed [NEO_W-1:0]   mean;
  logic signed [NEO_W+15:0]  scaled;
  energy_t                   thr_next;

  // the calculator's own energy operator on the filtered signal
  neo_calc #(.W(W)) u_neo (
    .clk  (clk),
    .rst_n(rst_n),
    .en_i (en_i),
    .x_i  (x_i),
    .psi_o(psi)
  );

  // psi is valid one cycle after the sample that produced it, so the
  // accumulation window is cycles WARMUP+1 .. WARMUP+2^WIN_LOG2 of the count.
  always_comb begin
    mean   = NEO_W'(sum >>> WIN_LOG2);
    scaled = (NEO_W+16)'(mean) * (NEO_W+16)'(C_MULT);
    if (mean <= 0)
      thr_next = '0;
    else if (scaled > (NEO_W+16)'(THR_MAX))
      thr_next = energy_t'(THR_MAX);
    else
      thr_next = NEO_W'(scaled);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      sum    <= '0;
      thr_o  <= '0;
      done_o <= 1'b0;
    end else if (en_i && !done_o) begin
      cnt <= cnt + 1'b1;
      if (cnt > CNT_W'(WARMUP) && cnt <= CNT_W'(WARMUP + (1 << WIN_LOG2)))
        sum <= sum + SUM_W'(psi);
      if (cnt == CNT_W'(WARMUP + (1 << WIN_LOG2) + 1)) begin
        thr_o  <= thr_next;
        done_o <= 1'b1;
      end
    end
  end

endmodule
