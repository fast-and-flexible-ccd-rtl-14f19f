// tb_clock_controller: self-checking test of clock_controller. The program
// words are placed straight into a behavioural SRAM and fetched through
// synthesize_pattern and memory_controller. A small interpreter written
// here, independently of the RTL, walks the same program and predicts
// every pattern and the clock cycles between patterns (16 per word plus
// the wait count after a pattern). The test covers set wait, seq with
// repeat, nested do / end do, jmp, a no-op word, stop, restart, and the
// loop-stack overflow flag.
module tb_clock_controller;
  import ccd_pkg::*;
  import ccd_asm_pkg::*;

  localparam int AW = 14;
  localparam int LD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic trigger = 0, stop = 0;
  logic sp_start, sp_done;
  pc_t sp_addr;
  seq_word_t sp_pattern;
  logic dac_load, par_load, loop_overflow;
  dac_code_t [N_DAC-1:0] dac_data;
  logic [PAR_BITS-1:0] par_data;
  cc_status_t status;
  logic rd_req, rd_ack, wr_ack;
  logic [AW-3:0] rd_addr;
  logic [31:0] rd_data;
  logic [AW-1:0] sram_addr;
  logic [7:0] dq_o, dq_i;
  logic dq_oe, ce_n, oe_n, we_n;

  clock_controller #(.LOOP_DEPTH(LD)) dut (
    .clk, .rst_n, .trigger, .stop, .sp_start, .sp_addr, .sp_done, .sp_pattern,
    .dac_load, .dac_data, .par_load, .par_data, .status, .loop_overflow
  );
  synthesize_pattern #(.AW(AW)) sp (
    .clk, .rst_n, .start(sp_start), .word_addr(sp_addr), .done(sp_done), .pattern(sp_pattern),
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
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  seq_word_t prog [64];
  task automatic put(int a, seq_word_t w);
    prog[a] = w;
    for (int b = 0; b < 12; b++) mem.poke(12*a + b, w[8*b +: 8]);
  endtask

  function automatic seq_word_t mkpat(int tag);
    dac_code_t d [8];
    for (int i = 0; i < 8; i++) d[i] = dac_code_t'(tag * 8 + i);
    return w_pat(d, 10'(tag));
  endfunction

  // Reference interpreter: expected patterns and cycles from the previous one.
  seq_word_t exp_w [$];
  int        exp_gap [$];
  int        exp_vram [$];
  function automatic void interpret(int n_out);
    int pc = 0, wt = 0, t = 0, last_t = 0;
    int ls [$], lc [$];
    int first = 1;
    while (exp_w.size() < n_out) begin
      seq_word_t w = prog[pc];
      t += 16;
      case (w[95:92])
        4'h1: begin
          exp_w.push_back(w); exp_gap.push_back(first ? -1 : t - last_t); exp_vram.push_back(0);
          first = 0; last_t = t; t += wt; pc++;
        end
        4'h2: begin
          int n = w[31:0], b = w[47:32], l = w[63:48];
          for (int r = 0; r < n; r++)
            for (int k = 0; k < l; k++) begin
              seq_word_t v = prog[b + k];
              t += 16;
              if (v[95:92] == 4'h1) begin
                exp_w.push_back(v); exp_gap.push_back(first ? -1 : t - last_t); exp_vram.push_back(1);
                first = 0; last_t = t; t += wt;
              end
            end
          pc++;
        end
        4'h3: begin wt = w[31:0]; pc++; end
        4'h4: begin
          if (ls.size() < LD) begin ls.push_back(pc + 1); lc.push_back(w[31:0]); end
          pc++;
        end
        4'h5: begin
          if (ls.size() == 0) pc++;
          else if (lc[$] > 1) begin lc[$] = lc[$] - 1; pc = ls[$]; end
          else begin void'(ls.pop_back()); void'(lc.pop_back()); pc++; end
        end
        4'h6: pc = w[15:0];
        default: pc++;
      endcase
    end
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_loads = 0, last_load = 0, cyc = 0, idx = 0, vram_seen = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && dac_load) begin
    check(par_load, "par_load with dac_load");
    if (idx < exp_w.size()) begin
      seq_word_t got;
      for (int i = 0; i < 8; i++) got[10*i +: 10] = dac_data[i];
      check(got[79:0] == exp_w[idx][79:0] && par_data == exp_w[idx][89:80],
            $sformatf("pattern %0d: got %h expected %h", idx, got[79:0], exp_w[idx][79:0]));
      if (exp_gap[idx] >= 0)
        check(cyc - last_load == exp_gap[idx],
              $sformatf("pattern %0d: %0d cycles after previous, expected %0d", idx, cyc - last_load, exp_gap[idx]));
      check(status.in_vram == exp_vram[idx][0], $sformatf("pattern %0d: in_vram", idx));
      if (status.in_vram) vram_seen++;
    end
    last_load = cyc;
    idx++;
  end

  initial begin
    for (int i = 0; i < 64; i++) put(i, '0);
    put(0,  w_wait(3));
    put(1,  mkpat(1));
    put(2,  w_do(3));
    put(3,  w_seq(2, 20, 3));
    put(4,  w_do(2));
    put(5,  mkpat(2));
    put(6,  w_enddo());
    put(7,  w_enddo());
    put(8,  w_wait(0));
    put(9,  w_seq(1, 30, 2));
    put(10, w_jmp(12));
    put(11, mkpat(9));            // jumped over
    put(12, '0);                  // no-op
    put(13, w_wait(7));
    put(14, mkpat(3));
    put(15, w_jmp(1));
    put(20, mkpat(4)); put(21, mkpat(5)); put(22, mkpat(6));
    put(30, mkpat(7)); put(31, mkpat(8));
    interpret(60);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(status.state == CC_IDLE, "idle after reset");
    check(dac_load == 0, "no output while idle");
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    check(status.state == CC_MEMCHK, "memory check after trigger");
    wait (idx == 60);
    @(negedge clk); stop = 1; @(negedge clk); stop = 0;
    check(status.state == CC_IDLE, "idle after stop");
    repeat (100) @(posedge clk);
    check(idx == 60, "no patterns after stop");
    check(vram_seen > 0, "V-ram patterns were played");
    check(loop_overflow == 0, "no loop overflow yet");
    // restart: must begin again from word 0
    idx = 0;
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    wait (idx == 12);
    @(negedge clk); stop = 1; @(negedge clk); stop = 0;
    idx = 1000;                   // patterns below are not compared
    // overflow: five nested do loops with a stack of four
    for (int i = 0; i < 5; i++) put(i, w_do(2));
    put(5, mkpat(1));
    put(6, w_jmp(6));
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    repeat (16 * 7) @(posedge clk);
    check(loop_overflow == 1, "loop overflow flagged for five nested loops");
    check(status.loop_depth == 3'(LD), "loop depth saturates at LOOP_DEPTH");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
