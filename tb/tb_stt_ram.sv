// tb_stt_ram: writes random words to random addresses of a 256-word model,
// reads them back and compares with a copy kept here; checks that accesses
// while the macro is disabled neither write nor change the read data.
module tb_stt_ram;
  localparam int DEPTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, we;
  logic [7:0] addr;
  logic [31:0] wdata, rdata, prev;
  logic [31:0] shadow [DEPTH];
  bit written [DEPTH];

  stt_ram #(.DEPTH(DEPTH)) dut (.clk, .en_i(en), .we_i(we), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(i); wdata = $urandom; shadow[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      addr = 8'($urandom); wdata = $urandom;
      case ($urandom_range(0, 2))
        0: begin en = 1; we = 1; shadow[addr] = wdata; end
        1: begin en = 0; we = 1; end            // powered down: ignored
        default: begin
          en = 1; we = 0;
          @(negedge clk); en = 0;
          checks++;
          if (rdata !== shadow[addr]) begin
            failures++;
            if (failures < 10) $display("addr %0d read %h exp %h", addr, rdata, shadow[addr]);
          end
          prev = rdata;
          @(negedge clk); en = 0; we = 0; addr = addr + 1;
          @(negedge clk);
          checks++;
          if (rdata !== prev) failures++;
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
