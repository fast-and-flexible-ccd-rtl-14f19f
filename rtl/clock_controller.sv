// clock_controller: the sequencer state machine that walks the P-ram and
// its V-rams and sends every pattern to the DAC and parallel interfaces.
//
// States (as on the status display): IDLE until a trigger arrives from the
// serial interface; MEMCHK, where the word address (pc) and a start pulse
// go to synthesize_pattern and the controller waits for its 96-bit word;
// FETCH, where that word is stored in the instruction register; DECODE,
// where it is executed; WAIT, which inserts the `set wait` number of
// cycles after every pattern. Then back to MEMCHK for the next word.
//
// Executing a word (see ccd_pkg for the encoding):
//   PAT    drive the eight DAC codes and the parallel code (dac_load /
//          par_load pulse for one cycle), advance, then WAIT.
//   SEQ    play the V-ram at [base, base+len) `count` times, then carry on
//          after the SEQ word. Words inside a V-ram are played as patterns.
//   WAIT   set the wait count used after each pattern.
//   DO     push (loop start, count) on the loop stack.
//   ENDDO  decrement the top count and jump back to its start, or pop.
//   JMP    jump.
// A `stop` from the serial interface returns to IDLE at once; the DAC
// interfaces keep their last codes.
//
// Timing: a word costs 1 (MEMCHK issue) + 13 (fetch by synthesize_pattern)
// + FETCH + DECODE = 16 cycles; a pattern then waits WAIT more cycles.
// The state sequence and what each state does follow the paper; the
// opcode set follows its P-ram command table. The loop-stack depth, the
// handling of a zero count, the start address 0 and the stop command are
// this design's choices.
module clock_controller
  import ccd_pkg::*;
#(
  parameter int unsigned LOOP_DEPTH = 4    // nesting depth of do / end do
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trigger,     // from serial interface
  input  logic                     stop,        // from serial interface
  // to / from synthesize_pattern
  output logic                     sp_start,
  output pc_t                      sp_addr,
  input  logic                     sp_done,
  input  seq_word_t                sp_pattern,
  // to the DAC and parallel interfaces
  output logic                     dac_load,
  output dac_code_t [N_DAC-1:0]    dac_data,
  output logic                     par_load,
  output logic [PAR_BITS-1:0]      par_data,
  // to the display controller
  output cc_status_t               status,
  output logic                     loop_overflow  // sticky: DO past LOOP_DEPTH
);

  localparam int unsigned DW = (LOOP_DEPTH > 1) ? $clog2(LOOP_DEPTH) : 1;

  cc_state_e   state;
  pc_t         pc;
  seq_word_t   ir;
  logic [31:0] wait_reg;
  logic [31:0] wait_cnt;

  // loop stack
  pc_t         lp_start [LOOP_DEPTH];
  logic [31:0] lp_count [LOOP_DEPTH];
  logic [DW:0] depth;

  // V-ram playback (seq)
  logic        in_vram;
  pc_t         vr_base, vr_len, vr_idx, ret_pc;
  logic [31:0] vr_rem;

  opcode_e op;
  assign op = word_op(ir[95:92]);
  wire is_pat = (state == CC_DECODE) && (op == OP_PAT);

  wire [DW-1:0] top = DW'(depth - 1'b1);   // index of the innermost loop

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= CC_IDLE;
      pc            <= '0;
      ir            <= '0;
      wait_reg      <= '0;
      wait_cnt      <= '0;
      depth         <= '0;
      in_vram       <= 1'b0;
      vr_base       <= '0;
      vr_len        <= '0;
      vr_idx        <= '0;
      vr_rem        <= '0;
      ret_pc        <= '0;
      sp_start      <= 1'b0;
      loop_overflow <= 1'b0;
      for (int i = 0; i < LOOP_DEPTH; i++) begin
        lp_start[i] <= '0;
        lp_count[i] <= '0;
      end
    end else begin
      sp_start <= 1'b0;
      if (stop) begin
        state <= CC_IDLE;
      end else begin
        unique case (state)
          CC_IDLE: if (trigger) begin
            pc       <= '0;
            depth    <= '0;
            in_vram  <= 1'b0;
            wait_reg <= '0;
            sp_start <= 1'b1;
            state    <= CC_MEMCHK;
          end
          CC_MEMCHK: if (sp_done) state <= CC_FETCH;
          CC_FETCH: begin
            ir    <= sp_pattern;
            state <= CC_DECODE;
          end
          CC_DECODE: begin
            state    <= CC_MEMCHK;
            sp_start <= 1'b1;
            if (is_pat && wait_reg != 0) begin
              wait_cnt <= wait_reg;
              state    <= CC_WAIT;
              sp_start <= 1'b0;
            end
            if (in_vram) begin
              if (vr_idx == vr_len - 1'b1) begin
                vr_idx <= '0;
                if (vr_rem > 1) begin
                  vr_rem <= vr_rem - 1;
                  pc     <= vr_base;
                end else begin
                  in_vram <= 1'b0;
                  pc      <= ret_pc;
                end
              end else begin
                vr_idx <= vr_idx + 1'b1;
                pc     <= pc + 1'b1;
              end
            end else begin
              unique case (op)
                OP_SEQ: begin
                  if (ir[31:0] == 0 || ir[63:48] == 0) begin
                    pc <= pc + 1'b1;
                  end else begin
                    in_vram <= 1'b1;
                    vr_base <= ir[47:32];
                    vr_len  <= ir[63:48];
                    vr_idx  <= '0;
                    vr_rem  <= ir[31:0];
                    ret_pc  <= pc + 1'b1;
                    pc      <= ir[47:32];
                  end
                end
                OP_WAIT: begin
                  wait_reg <= ir[31:0];
                  pc       <= pc + 1'b1;
                end
                OP_DO: begin
                  if (depth < (DW+1)'(LOOP_DEPTH)) begin
                    lp_start[depth[DW-1:0]] <= pc + 1'b1;
                    lp_count[depth[DW-1:0]] <= ir[31:0];
                    depth <= depth + 1'b1;
                  end else begin
                    loop_overflow <= 1'b1;
                  end
                  pc <= pc + 1'b1;
                end
                OP_ENDDO: begin
                  if (depth == 0) begin
                    pc <= pc + 1'b1;
                  end else if (lp_count[top] > 1) begin
                    lp_count[top] <= lp_count[top] - 1;
                    pc <= lp_start[top];
                  end else begin
                    depth <= depth - 1'b1;
                    pc    <= pc + 1'b1;
                  end
                end
                OP_JMP:  pc <= ir[15:0];
                default: pc <= pc + 1'b1;   // OP_PAT, OP_NOP, unknown
              endcase
            end
          end
          CC_WAIT: begin
            wait_cnt <= wait_cnt - 1;
            if (wait_cnt == 1) begin
              state    <= CC_MEMCHK;
              sp_start <= 1'b1;
            end
          end
          default: state <= CC_IDLE;
        endcase
      end
    end
  end

  assign sp_addr  = pc;
  assign dac_load = is_pat;
  assign par_load = is_pat;
  always_comb begin
    for (int i = 0; i < N_DAC; i++) dac_data[i] = ir[PORT_BITS*i +: PORT_BITS];
    par_data = ir[89:80];
  end

  assign status = '{state: state, pc: pc, loop_depth: 3'(depth), in_vram: in_vram};

  a_depth: assert property (@(posedge clk) disable iff (!rst_n) depth <= (DW+1)'(LOOP_DEPTH))
    else $error("clock_controller: loop stack overrun");

endmodule
