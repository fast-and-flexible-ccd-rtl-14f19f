// tb_ccd_driver_full: the whole CCD driver at its default parameters
// (4 MHz clock, 9600 baud serial link, full display timing) reading out
// one complete frame with the readout program of the board description:
//     set A = 64, B = 2, xaxis = 1024, yaxis = 256
// The program is that of a 1024 x 1024 CCD with yaxis cut to 256 lines:
// a full 1024-line frame is about 604 million clock cycles (2.5 minutes
// of real time at 4 MHz), too long for a routine simulation run, and every
// line is the same.
//     start: do yaxis { set wait A; seq 1 vertical; set wait B;
//                       seq xaxis horizontal } end do; jmp start
// The program is compiled and downloaded over the serial line, the frame
// runs, then the sequencer is stopped, restarted with the run command and
// stopped again. Every DAC latch edge of the frame is checked: the five
// clock voltages, HOLD, and the cycles between rows inside a V-ram. The
// checks and the mechanism counts are those of tb_ccd_driver_system.
module tb_ccd_driver_full;
  import ccd_pkg::*;
  import ccd_asm_pkg::*;

  // ---- test size ----------------------------------------------------------
  localparam int CLK_HZ = 4_000_000, BAUD = 9_600;   // the design's defaults
  localparam int X = 1024, Y = 256;       // pixels per line, lines per frame
  localparam int A = 64, B = 2;           // set wait A (vertical), B (horizontal)
  localparam int FRAMES = 1;              // frames checked before the stop
  localparam int HALF_NS = 125;           // 4 MHz
  localparam int WATCHDOG = 700_000_000;  // cycles

  logic clk = 0, rst_n = 0, rxd = 1;
  always #(HALF_NS) clk = ~clk;

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

  ccd_driver_system dut (
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
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- V-rams: rows of {P1H, P2H, RST, P1V, P2V} volts and HOLD -----------
  localparam int NCLK = 5;
  localparam int HR = 16, VR = 3;
  real hv [HR][NCLK];
  bit  hh [HR];
  real vv [VR][NCLK];
  initial begin
    // one-pixel readout, two-phase serial register
    for (int r = 0; r < HR; r++) begin
      hv[r][0] = (r < 8) ? -8.0 : 6.0;     // P1H
      hv[r][1] = (r < 8) ?  6.0 : -8.0;    // P2H
      hv[r][2] = (r < 2) ?  6.0 : -8.0;    // RST
      hv[r][3] = 6.0;                      // P1V
      hv[r][4] = 6.0;                      // P2V
      hh[r]    = (r < 8);                  // HOLD 5 V -> 1, 0 V -> 0
    end
    // line transfer, two-phase vertical register
    vv[0] = '{-8.0, 6.0, 6.0, -8.0,  6.0};
    vv[1] = '{-8.0, 6.0, 6.0,  6.0, -8.0};
    vv[2] = '{-8.0, 6.0, 6.0,  6.0,  6.0};
  end

  // ---- compiler -------------------------------------------------------------
  localparam int HB = 8, VB = HB + 2*HR;       // V-ram word addresses
  localparam int NWORDS = VB + 2*VR;
  seq_word_t prog [NWORDS];

  function automatic seq_word_t row_word(real v [NCLK], bit hold, bit ref_edge);
    dac_code_t d [8];
    for (int i = 0; i < 8; i++) d[i] = 10'h080;
    for (int i = 0; i < NCLK; i++) d[i] = {1'b0, ref_edge, v2code(v[i])};
    return w_pat(d, {9'd0, hold});
  endfunction

  task automatic compile();
    for (int i = 0; i < NWORDS; i++) prog[i] = '0;
    prog[0] = w_do(Y);
    prog[1] = w_wait(A);
    prog[2] = w_seq(1, VB, 2*VR);
    prog[3] = w_wait(B);
    prog[4] = w_seq(X, HB, 2*HR);
    prog[5] = w_enddo();
    prog[6] = w_jmp(0);
    for (int r = 0; r < HR; r++) begin
      prog[HB + 2*r]     = row_word(hv[r], hh[r], 1'b0);
      prog[HB + 2*r + 1] = row_word(hv[r], hh[r], 1'b1);
    end
    for (int r = 0; r < VR; r++) begin
      prog[VB + 2*r]     = row_word(vv[r], 1'b0, 1'b0);
      prog[VB + 2*r + 1] = row_word(vv[r], 1'b0, 1'b1);
    end
  endtask

  // ---- host serial link -----------------------------------------------------
  localparam int BIT = (CLK_HZ + BAUD/2) / BAUD;
  task automatic send(logic [7:0] b);
    rxd = 0; repeat (BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (BIT) @(posedge clk); end
    rxd = 1; repeat (2*BIT) @(posedge clk);
  endtask
  task automatic download();
    send(CMD_LOAD); send(8'd0); send(8'd0);
    send(8'(NWORDS)); send(8'(NWORDS >> 8));
    for (int w = 0; w < NWORDS; w++)
      for (int b = 0; b < 12; b++) send(prog[w][8*b +: 8]);
  endtask

  // ---- expected row order of one frame ----------------------------------------
  localparam int ROWS_PER_LINE = VR + X*HR;
  localparam int ROWS_PER_FRAME = Y * ROWS_PER_LINE;
  // row k of the frame: vertical (is_v=1, r) or horizontal (is_v=0, r)
  function automatic void frame_row(int k, output bit is_v, output int r);
    int p = k % ROWS_PER_LINE;
    if (p < VR) begin is_v = 1; r = p; end
    else begin is_v = 0; r = (p - VR) % HR; end
  endfunction

  // ---- monitors -----------------------------------------------------------------
  int cyc = 0;
  int row_k = 0, last_latch = 0, rows_checked = 0;
  int n_loads = 0, n_trig = 0, n_vram = 0, n_vert = 0, n_jmp = 0, n_waitA = 0, n_waitB = 0;
  int n_hold = 0, n_stop_idle = 0, n_lcd = 0, n_frames = 0;
  logic ref_prev = 0, hold_prev = 0, load_prev = 0, vram_prev = 0, e_prev = 0;
  cc_state_e st_prev = CC_IDLE;
  pc_t pc_prev = '0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      // downloads and triggers
      if (load_prev && !loading) n_loads++;
      if (st_prev == CC_IDLE && status.state == CC_MEMCHK) begin
        n_trig++;
        row_k = 0;
      end
      if (st_prev != CC_IDLE && status.state == CC_IDLE) n_stop_idle++;
      // V-ram plays, do loop passes, jumps
      if (!vram_prev && status.in_vram) n_vram++;
      if (st_prev == CC_DECODE && pc_prev == pc_t'(2)) n_vert++;
      if (st_prev == CC_DECODE && pc_prev == pc_t'(6)) n_jmp++;
      // HOLD pulses
      if (par_port[0] && !hold_prev) n_hold++;
      // display traffic
      if (e_prev && !lcd_e) n_lcd++;
      // the reference clock rose on the previous edge: the DACs have latched
      if (dac_port[0][8] && !ref_prev) begin
        bit is_v;
        int r;
        frame_row(row_k % ROWS_PER_FRAME, is_v, r);
        for (int i = 0; i < NCLK; i++) begin
          real e;
          e = is_v ? vv[r][i] : hv[r][i];
          check(clk_v[i] - e < 0.06 && e - clk_v[i] < 0.06,
                $sformatf("row %0d clock %0d: %f V expected %f V", row_k, i, clk_v[i], e));
        end
        check(par_port[0] == (is_v ? 1'b0 : hh[r]), $sformatf("row %0d HOLD", row_k));
        if (r > 0) begin
          int gap, wt;
          gap = cyc - last_latch;
          wt = is_v ? A : B;
          check(gap == 2 * (16 + wt), $sformatf("row %0d: %0d cycles after previous row", row_k, gap));
          if (is_v) n_waitA++; else n_waitB++;
        end
        last_latch = cyc;
        rows_checked++;
        row_k++;
        if (row_k % ROWS_PER_FRAME == 0) n_frames++;
      end
      ref_prev  = dac_port[0][8];
      hold_prev = par_port[0];
      load_prev = loading;
      vram_prev = status.in_vram;
      st_prev   = status.state;
      pc_prev   = status.pc;
      e_prev    = lcd_e;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int holds_at_stop, rows_at_stop, frames_start;
    compile();
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(status.state == CC_IDLE, "idle after reset");
    download();
    check(mem.writes == 12 * NWORDS, $sformatf("%0d bytes in SRAM", mem.writes));
    for (int w = 0; w < NWORDS; w++)
      for (int b = 0; b < 12; b++)
        check(mem.peek(12*w + b) == prog[w][8*b +: 8], $sformatf("SRAM word %0d byte %0d", w, b));
    // frames run by themselves after the download
    frames_start = n_frames;
    wait (n_frames >= FRAMES);
    check(n_hold >= FRAMES * X * Y, $sformatf("%0d HOLD pulses for %0d frames", n_hold, FRAMES));
    // stop
    send(CMD_STOP);
    repeat (3) @(posedge clk);
    check(status.state == CC_IDLE, "idle after stop");
    holds_at_stop = n_hold; rows_at_stop = rows_checked;
    repeat (2000) @(posedge clk);
    check(rows_checked == rows_at_stop && n_hold == holds_at_stop, "clocks frozen while stopped");
    // run again: starts from the first row of the frame
    send(CMD_RUN);
    wait (rows_checked >= rows_at_stop + ROWS_PER_LINE + 2);
    send(CMD_STOP);
    repeat (3) @(posedge clk);
    check(!loop_overflow && !frame_err, "no loop overflow, no framing error");
    $display("mechanisms: loads=%0d triggers=%0d vram=%0d vertical=%0d jmp=%0d waitA=%0d waitB=%0d hold=%0d stop=%0d lcd=%0d frames=%0d rows=%0d",
             n_loads, n_trig, n_vram, n_vert, n_jmp, n_waitA, n_waitB, n_hold, n_stop_idle, n_lcd, n_frames, rows_checked);
    check(n_loads == 1, "download happened");
    check(n_trig == 2, "auto trigger after load and run command");
    check(n_vram > 0, "seq played V-rams");
    check(n_vert >= FRAMES * Y, "do loop repeated the line");
    check(n_jmp >= FRAMES, "jmp restarted the frame");
    check(n_waitA > 0 && n_waitB > 0, "both wait values used");
    check(n_stop_idle == 2, "both stop commands reached idle");
    check(n_lcd > 0, "display written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
