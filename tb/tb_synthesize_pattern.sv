// tb_synthesize_pattern: self-checking test of synthesize_pattern, working
// through a memory_controller and a behavioural SRAM filled with random
// bytes. For random word addresses it checks the assembled 96-bit word
// against the 12 bytes at 12*addr (little-endian), that exactly three
// 32-bit reads are made, and that done comes 13 cycles after start.
module tb_synthesize_pattern;
  import ccd_pkg::*;

  localparam int AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  pc_t word_addr = '0;
  seq_word_t pattern;
  logic rd_req, rd_ack;
  logic [AW-3:0] rd_addr;
  logic [31:0] rd_data;
  logic [AW-1:0] sram_addr;
  logic [7:0] dq_o, dq_i;
  logic dq_oe, ce_n, oe_n, we_n, wr_ack;

  synthesize_pattern #(.AW(AW)) dut (
    .clk, .rst_n, .start, .word_addr, .done, .pattern,
    .rd_req, .rd_addr, .rd_ack, .rd_data
  );
  memory_controller #(.AW(AW)) mc (
    .clk, .rst_n, .rd_req, .rd_addr, .rd_ack, .rd_data,
    .wr_req(1'b0), .wr_addr('0), .wr_data('0), .wr_ack,
    .sram_addr, .sram_dq_o(dq_o), .sram_dq_i(dq_i), .sram_dq_oe(dq_oe),
    .sram_ce_n(ce_n), .sram_oe_n(oe_n), .sram_we_n(we_n)
  );
  sram_model #(.AW(AW)) mem (
    .addr(sram_addr), .dq_i(dq_o), .dq_oe(dq_oe), .dq_o(dq_i), .ce_n, .oe_n, .we_n
  );

  int checks = 0, failures = 0;
  int acks = 0;
  always @(posedge clk) if (rd_ack) acks++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) mem.poke(i, 8'($urandom));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int a, cyc;
      seq_word_t expect_w;
      a = (t < 2) ? t : int'($urandom_range(0, (2**AW) / 12 - 1));
      for (int b = 0; b < 12; b++) expect_w[8*b +: 8] = mem.peek(12*a + b);
      acks = 0;
      @(negedge clk);
      start = 1; word_addr = pc_t'(a);
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(pattern == expect_w, $sformatf("word %0d: got %h expected %h", a, pattern, expect_w));
      check(cyc == 13, $sformatf("start to done %0d cycles, expected 13", cyc));
      check(acks == 3, $sformatf("%0d memory reads, expected 3", acks));
      repeat (t % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
