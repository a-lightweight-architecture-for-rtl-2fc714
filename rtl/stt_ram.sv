// stt_ram: behavioural model of the non-volatile STT-RAM storage macro.
//
// This is not synthesizable memory design: the real part is a spin-transfer-
// torque magnetic RAM macro (32 MB for a 24-hour recording), a process-
// specific array that is instantiated, not written as RTL. The model gives
// it a plausible single-port macro interface: a power/chip enable, write
// enable, word address, 32-bit write data and registered read data. Its
// write and read times (a few nanoseconds) are far below one period of the
// 24.414 kHz system clock, so the model completes every access within the
// clock cycle. While en_i is low the macro is powered down and ignores its
// inputs; being non-volatile it keeps its contents. The storage capacity is
// published; the port list and word width are this design's choice.
//
// Interface: on a rising clk edge with en_i high, we_i high writes wdata_i to
// addr_i; we_i low reads addr_i into rdata_o (valid the next cycle).
module stt_ram #(
  parameter int DEPTH = 8388608,  // 32-bit words: 32 MB
  parameter int DW    = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [DW-1:0] wdata_i,
  output logic [DW-1:0] rdata_o
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end

endmodule
