// tb_memory_controller: self-checking test of memory_controller with a
// behavioural SRAM. Writes random bytes through the write port, checks
// them in the SRAM array, then reads them back as 32-bit words (single and
// back-to-back requests) and checks the data, the little-endian byte
// order, the 4-cycle read latency and the 3-cycle write.
module tb_memory_controller;
  import ccd_pkg::*;

  localparam int AW = 12;        // small SRAM for the test
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_req = 0, rd_ack, wr_req = 0, wr_ack;
  logic [AW-3:0] rd_addr = '0;
  logic [31:0] rd_data;
  logic [AW-1:0] wr_addr = '0;
  logic [7:0] wr_data = '0;
  logic [AW-1:0] sram_addr;
  logic [7:0] dq_o, dq_i;
  logic dq_oe, ce_n, oe_n, we_n;

  memory_controller #(.AW(AW)) dut (
    .clk, .rst_n, .rd_req, .rd_addr, .rd_ack, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ack,
    .sram_addr, .sram_dq_o(dq_o), .sram_dq_i(dq_i), .sram_dq_oe(dq_oe),
    .sram_ce_n(ce_n), .sram_oe_n(oe_n), .sram_we_n(we_n)
  );
  sram_model #(.AW(AW)) mem (
    .addr(sram_addr), .dq_i(dq_o), .dq_oe(dq_oe), .dq_o(dq_i), .ce_n, .oe_n, .we_n
  );

  int checks = 0, failures = 0;
  logic [7:0] ref_mem [2**AW];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_byte(int a, logic [7:0] d);
    int cyc = 0;
    @(negedge clk);
    wr_req = 1; wr_addr = AW'(a); wr_data = d;
    do begin @(posedge clk); cyc++; end while (!wr_ack);
    @(negedge clk); wr_req = 0;
    check(cyc == 3, $sformatf("write took %0d cycles, expected 3", cyc));
  endtask

  task automatic read_word(int wa, output logic [31:0] d, output int cyc);
    cyc = 0;
    @(negedge clk);
    rd_req = 1; rd_addr = (AW-2)'(wa);
    forever begin
      @(posedge clk); cyc++;
      if (rd_ack) begin d = rd_data; break; end
      #1;
    end
    @(negedge clk); rd_req = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int cyc;
    for (int i = 0; i < 2**AW; i++) begin
      ref_mem[i] = 8'($urandom);
      mem.poke(i, ref_mem[i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // writes through the port
    for (int i = 0; i < 64; i++) begin
      int a = 100 + i;
      ref_mem[a] = 8'($urandom);
      write_byte(a, ref_mem[a]);
    end
    for (int i = 0; i < 64; i++)
      check(mem.peek(100 + i) == ref_mem[100 + i], $sformatf("sram byte %0d after write", 100 + i));
    // single reads
    for (int w = 20; w < 40; w++) begin
      read_word(w, d, cyc);
      check(d == {ref_mem[4*w+3], ref_mem[4*w+2], ref_mem[4*w+1], ref_mem[4*w]},
            $sformatf("read word %0d got %h", w, d));
      check(cyc == 4, $sformatf("read latency %0d, expected 4", cyc));
    end
    // back-to-back reads: rd_req kept high, address moved after each ack
    @(negedge clk);
    rd_req = 1; rd_addr = 50;
    begin
      int got = 0, cycles = 0;
      while (got < 8) begin
        @(posedge clk); cycles++;
        if (rd_ack) begin
          check(rd_data == {ref_mem[4*(50+got)+3], ref_mem[4*(50+got)+2],
                            ref_mem[4*(50+got)+1], ref_mem[4*(50+got)]},
                $sformatf("burst word %0d", got));
          got++;
          #1 rd_addr = (AW-2)'(50 + got);
        end
      end
      check(cycles == 32, $sformatf("8 back-to-back reads took %0d cycles, expected 32", cycles));
    end
    @(negedge clk); rd_req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
