// tb_multilevel_clock: the five-level clocking demonstration. One clock
// line (DAC port 0) steps through five voltage levels, -8, -4, 0, +4 and
// +8 V, and back down, as used to cut spurious charge by softening clock
// edges; the other four ports hold fixed levels. The program
//     set wait 3; 8 rows (two words each); jmp to the first row
// is downloaded over the serial line into the full system at a reduced
// baud rate. The test checks each level at the DAC-board output (within
// half a step), that all five levels occur, the time spent on each level
// (2 words x (16 + 3) cycles = 38 cycles), and that the fixed clocks do
// not move.
module tb_multilevel_clock;
  import ccd_pkg::*;
  import ccd_asm_pkg::*;

  localparam int CLK_HZ = 1_000_000, BAUD = 100_000, WAITC = 3;
  localparam int NROW = 8;
  logic clk = 0, rst_n = 0, rxd = 1;
  always #500 clk = ~clk;

  logic [SRAM_AW-1:0] sram_addr;
  logic [7:0] dq_o, dq_i;
  logic dq_oe, ce_n, oe_n, we_n;
  dac_code_t [N_DAC-1:0] dac_port;
  logic [N_DAC*8-1:0] dac_code;
  real clk_v [N_DAC];
  logic [PAR_BITS-1:0] par_port;
  logic lcd_rs, lcd_rw, lcd_e;
  logic [7:0] lcd_d;
  cc_status_t status;
  logic loading, loop_overflow, frame_err;

  ccd_driver_system #(.CLK_HZ(CLK_HZ), .BAUD(BAUD), .LCD_POWERUP(50), .LCD_CMD(4), .LCD_CLEAR(20)) dut (
    .clk, .rst_n, .rxd,
    .sram_addr, .sram_dq_o(dq_o), .sram_dq_i(dq_i), .sram_dq_oe(dq_oe),
    .sram_ce_n(ce_n), .sram_oe_n(oe_n), .sram_we_n(we_n),
    .dac_port, .dac_code, .clk_v, .par_port,
    .lcd_rs, .lcd_rw, .lcd_e, .lcd_d,
    .status, .loading, .loop_overflow, .frame_err
  );
  sram_model #(.AW(SRAM_AW)) mem (
    .addr(sram_addr), .dq_i(dq_o), .dq_oe(dq_oe), .dq_o(dq_i), .ce_n, .oe_n, .we_n
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  real level [NROW] = '{-8.0, -4.0, 0.0, 4.0, 8.0, 4.0, 0.0, -4.0};
  localparam int NWORDS = 2 + 2*NROW;
  seq_word_t prog [NWORDS];

  task automatic send(logic [7:0] b);
    localparam int BIT = CLK_HZ / BAUD;
    rxd = 0; repeat (BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (BIT) @(posedge clk); end
    rxd = 1; repeat (2*BIT) @(posedge clk);
  endtask

  int cyc = 0, latches = 0, last = 0, row = 0;
  bit seen [5];
  logic ref_prev = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dac_port[0][8] && !ref_prev) begin
      real e;
      e = level[row % NROW];
      check(clk_v[0] - e < 0.06 && e - clk_v[0] < 0.06,
            $sformatf("row %0d: %f V expected %f V", row, clk_v[0], e));
      for (int i = 1; i < 5; i++)
        check(clk_v[i] > 5.9 && clk_v[i] < 6.1, $sformatf("fixed clock %0d moved: %f V", i, clk_v[i]));
      for (int k = 0; k < 5; k++) if (e == -8.0 + 4.0 * k) seen[k] = 1;
      if (row % NROW != 0)
        check(cyc - last == 2 * (16 + WAITC), $sformatf("level held %0d cycles", cyc - last));
      last = cyc;
      row++;
    end
    if (rst_n) ref_prev = dac_port[0][8];
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog[0] = w_wait(WAITC);
    for (int r = 0; r < NROW; r++)
      for (int e = 0; e < 2; e++) begin
        dac_code_t d [8];
        for (int i = 0; i < 8; i++) d[i] = 10'h080;
        d[0] = {1'b0, e[0], v2code(level[r])};
        for (int i = 1; i < 5; i++) d[i] = {1'b0, e[0], v2code(6.0)};
        prog[1 + 2*r + e] = w_pat(d, 10'd0);
      end
    prog[NWORDS - 1] = w_jmp(1);
    repeat (5) @(posedge clk);
    rst_n = 1;
    send(CMD_LOAD); send(8'd0); send(8'd0); send(8'(NWORDS)); send(8'd0);
    for (int w = 0; w < NWORDS; w++)
      for (int b = 0; b < 12; b++) send(prog[w][8*b +: 8]);
    wait (row == 3 * NROW);
    for (int k = 0; k < 5; k++) check(seen[k], $sformatf("level %0d V shown", -8 + 4 * k));
    $display("levels shown: %0d rows over 3 cycles of the pattern", row);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
