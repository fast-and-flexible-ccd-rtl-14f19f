// tb_display_controller: self-checking test of display_controller with a
// small model of an HD44780-type character display. The model takes a
// byte on every falling edge of E, keeps the cursor address and the two
// 16-character lines. The test checks the initialisation commands, the E
// pulse width, the wait after a normal command and after clear, and that
// the displayed lines match the status for several status values.
module tb_display_controller;
  import ccd_pkg::*;

  localparam int PU = 20, CMD = 6, CLR = 15, EC = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cc_status_t status = '0;
  logic loading = 0;
  logic lcd_rs, lcd_rw, lcd_e;
  logic [7:0] lcd_d;

  display_controller #(.CLK_HZ(1_000_000), .POWERUP_CYCLES(PU), .CMD_CYCLES(CMD),
                       .CLEAR_CYCLES(CLR), .E_CYCLES(EC)) dut (
    .clk, .rst_n, .status, .loading, .lcd_rs, .lcd_rw, .lcd_e, .lcd_d
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // display model
  logic [7:0] cmds [$];
  logic [7:0] line [2][16];
  int addr = 0, writes = 0, cyc = 0, e_rise = 0, e_fall = 0, lines_done = 0;
  logic [7:0] last_cmd = 8'h00;
  logic e_prev = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (lcd_e && !e_prev) begin
        e_rise = cyc;
        if (e_fall != 0) begin
          int need = (last_cmd == 8'h01) ? CLR : CMD;
          check(cyc - e_fall >= need, $sformatf("only %0d cycles after command %h", cyc - e_fall, last_cmd));
        end
      end
      if (!lcd_e && e_prev) begin
        check(cyc - e_rise == EC, $sformatf("E high for %0d cycles", cyc - e_rise));
        check(lcd_rw == 0, "write mode");
        e_fall = cyc;
        if (!lcd_rs) begin
          cmds.push_back(lcd_d);
          last_cmd = lcd_d;
          if (lcd_d[7]) addr = lcd_d[6:0];
        end else begin
          last_cmd = 8'h00;
          if (addr < 16) line[0][addr] = lcd_d;
          else if (addr >= 8'h40 && addr < 8'h50) line[1][addr - 8'h40] = lcd_d;
          if (addr == 8'h4F) lines_done++;
          addr++;
        end
      end
      e_prev = lcd_e;
    end
  end

  function automatic string shown(int l);
    string s = "";
    for (int i = 0; i < 16; i++) s = {s, string'(line[l][i])};
    return s;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic show_and_check(cc_status_t s, bit ld, string l1, string l2);
    int n;
    status = s; loading = ld;
    n = lines_done;
    wait (lines_done == n + 2);    // one refresh may have started before the change
    check(shown(0) == l1, $sformatf("line 1 '%s' expected '%s'", shown(0), l1));
    check(shown(1) == l2, $sformatf("line 2 '%s' expected '%s'", shown(1), l2));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (PU - 2) @(posedge clk);
    check(!lcd_e && cmds.size() == 0, "nothing sent during the power-up wait");
    show_and_check('{state: CC_WAIT, pc: 16'h1A2B, loop_depth: 3'd2, in_vram: 1'b1}, 1'b1,
                   "WAIT PC=1A2B D2 ", "VRAM LOAD       ");
    check(cmds.size() >= 4 && cmds[0] == 8'h38 && cmds[1] == 8'h0C && cmds[2] == 8'h01 && cmds[3] == 8'h06,
          "initialisation commands 38 0C 01 06");
    show_and_check('{state: CC_IDLE, pc: 16'h0000, loop_depth: 3'd0, in_vram: 1'b0}, 1'b0,
                   "IDLE PC=0000 D0 ", "PRAM            ");
    show_and_check('{state: CC_MEMCHK, pc: 16'hFEDC, loop_depth: 3'd4, in_vram: 1'b0}, 1'b0,
                   "MCHK PC=FEDC D4 ", "PRAM            ");
    show_and_check('{state: CC_FETCH, pc: 16'h0009, loop_depth: 3'd1, in_vram: 1'b1}, 1'b0,
                   "FTCH PC=0009 D1 ", "VRAM            ");
    show_and_check('{state: CC_DECODE, pc: 16'h7C3E, loop_depth: 3'd3, in_vram: 1'b0}, 1'b1,
                   "DECD PC=7C3E D3 ", "PRAM LOAD       ");
    check(cmds[4] == 8'h80, "line 1 address command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
