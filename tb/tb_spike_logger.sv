// tb_spike_logger: with a 4-word storage, issues detections at known sample
// indices followed by classifications of each class, and checks that SS and
// CS produce {type, sample index} records at consecutive addresses, F and
// classifications without storage enable write nothing, and that once the
// storage is full further records are dropped and counted.
module tb_spike_logger;
  import spike_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic det, cls_v, sen, we, full;
  spike_class_e cls;
  logic [1:0] addr;
  logic [31:0] wdata, dropped;
  logic [2:0] count;
  ts_t sidx;
  logic [31:0] mem [DEPTH];
  int n_wr = 0;

  spike_logger #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .detect_i(det), .cls_valid_i(cls_v), .cls_i(cls),
    .store_en_i(sen), .mem_we_o(we), .mem_addr_o(addr), .mem_wdata_o(wdata), .count_o(count),
    .dropped_o(dropped), .full_o(full), .sample_idx_o(sidx));

  always_ff @(posedge clk) if (we) begin mem[addr] <= wdata; n_wr++; end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // detection at sample index ts, classification 'gap' cycles later
  task automatic spike(input int ts, input spike_class_e c, input bit enable);
    while (int'(sidx) != ts - 1) @(negedge clk);
    @(negedge clk);
    chk(int'(sidx) == ts, "sample index counts clocks");
    det = 1; @(negedge clk); det = 0;
    repeat (50) @(negedge clk);
    sen = enable; cls = c; cls_v = 1;
    @(negedge clk);
    cls_v = 0; sen = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    det = 0; cls_v = 0; sen = 0; cls = CLS_FALSE;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    spike(100, CLS_SIMPLE, 1);
    spike(300, CLS_FALSE, 1);
    spike(500, CLS_COMPLEX, 1);
    spike(700, CLS_SIMPLE, 0);
    spike(900, CLS_COMPLEX, 1);
    spike(1100, CLS_SIMPLE, 1);
    chk(count == 4 && full, "full after four records");
    spike(1300, CLS_COMPLEX, 1);
    spike(1500, CLS_SIMPLE, 1);
    chk(mem[0] == {1'b0, 31'd100}, "record 0");
    chk(mem[1] == {1'b1, 31'd500}, "record 1");
    chk(mem[2] == {1'b1, 31'd900}, "record 2");
    chk(mem[3] == {1'b0, 31'd1100}, "record 3");
    chk(n_wr == 4, "write count");
    chk(dropped == 2, "dropped count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
