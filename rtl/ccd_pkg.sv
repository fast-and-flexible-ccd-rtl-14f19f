// ccd_pkg: types and constants shared by the CCD clock sequencer.
//
// The sequencer memory holds 96-bit words. A word is either a DAC pattern
// (one time step of every clock line) or one of the P-ram control commands:
// seq, set wait, do, end do and jmp. The 96-bit width, the eight 10-bit DAC
// ports and the 10-bit parallel port follow the board description; the bit
// layout of the word and the opcode values are this design's own choice:
//
//   [95:92] opcode
//   OP_PAT   : [79:0]  DAC port i at [10*i+9 : 10*i]   (i = 0..7)
//              [89:80] parallel (ADC board) port
//   OP_SEQ   : [31:0]  repeat count, [47:32] V-ram start address,
//              [63:48] V-ram length in words
//   OP_WAIT  : [31:0]  wait cycles inserted after every pattern
//   OP_DO    : [31:0]  loop count
//   OP_ENDDO : no operand
//   OP_JMP   : [15:0]  target address
//   any other opcode is skipped (no operation).
//
// Words are stored little-endian in the byte-wide SRAM, 12 bytes per word:
// word w occupies bytes 12*w .. 12*w+11, byte 12*w holding bits [7:0].
package ccd_pkg;

  localparam int unsigned WORD_BITS  = 96;   // pattern / instruction width
  localparam int unsigned N_DAC      = 8;    // DAC interfaces on the board
  localparam int unsigned PORT_BITS  = 10;   // bits per DAC interface
  localparam int unsigned PAR_BITS   = 10;   // parallel interface width
  localparam int unsigned SRAM_AW    = 19;   // 512 Kbyte SRAM, byte address
  localparam int unsigned PC_BITS    = 16;   // sequencer word address
  localparam int unsigned BYTES_PER_WORD = WORD_BITS / 8;  // 12

  typedef logic [WORD_BITS-1:0] seq_word_t;
  typedef logic [PC_BITS-1:0]   pc_t;
  typedef logic [PORT_BITS-1:0] dac_code_t;

  typedef enum logic [3:0] {
    OP_NOP   = 4'h0,
    OP_PAT   = 4'h1,
    OP_SEQ   = 4'h2,
    OP_WAIT  = 4'h3,
    OP_DO    = 4'h4,
    OP_ENDDO = 4'h5,
    OP_JMP   = 4'h6
  } opcode_e;

  // Clock Controller states, also shown on the status display.
  typedef enum logic [2:0] {
    CC_IDLE   = 3'd0,
    CC_MEMCHK = 3'd1,
    CC_FETCH  = 3'd2,
    CC_DECODE = 3'd3,
    CC_WAIT   = 3'd4
  } cc_state_e;

  // Status sent from the Clock Controller to the Display Controller.
  typedef struct packed {
    cc_state_e   state;
    pc_t         pc;
    logic [2:0]  loop_depth;
    logic        in_vram;
  } cc_status_t;

  // Serial download commands (one byte each).
  localparam logic [7:0] CMD_LOAD = 8'h4C;  // 'L' addr_lo addr_hi cnt_lo cnt_hi data...
  localparam logic [7:0] CMD_RUN  = 8'h52;  // 'R' start the sequencer again
  localparam logic [7:0] CMD_STOP = 8'h53;  // 'S' stop the sequencer

  function automatic opcode_e word_op(logic [3:0] op_bits);   // pass w[95:92]
    return opcode_e'(op_bits);
  endfunction

endpackage
