// ccd_asm_pkg: sequencer-word assembler used by the testbenches. It plays
// the part of the host-side V-ram / P-ram compiler: it turns clock levels
// in volts and P-ram commands into 96-bit words in the encoding of
// ccd_pkg, and adds the DAC reference (latch) clock bit.
package ccd_asm_pkg;
  import ccd_pkg::*;

  // Volts to 8-bit DAC code on a -15 V .. +15 V board (nearest step).
  function automatic logic [7:0] v2code(real v);
    int c;
    c = $rtoi((v + 15.0) * 255.0 / 30.0 + 0.5);
    if (c < 0) c = 0;
    if (c > 255) c = 255;
    return 8'(c);
  endfunction

  function automatic real code2v(logic [7:0] c);
    return -15.0 + real'(c) * 30.0 / 255.0;
  endfunction

  // Pattern word from eight 10-bit port values and the parallel port.
  function automatic seq_word_t w_pat(dac_code_t d [8], logic [9:0] par);
    seq_word_t w = '0;
    w[95:92] = OP_PAT;
    for (int i = 0; i < 8; i++) w[10*i +: 10] = d[i];
    w[89:80] = par;
    return w;
  endfunction

  function automatic seq_word_t w_seq(int unsigned n, int unsigned base, int unsigned len);
    seq_word_t w = '0;
    w[95:92] = OP_SEQ; w[31:0] = n; w[47:32] = 16'(base); w[63:48] = 16'(len);
    return w;
  endfunction
  function automatic seq_word_t w_wait(int unsigned n);
    seq_word_t w = '0; w[95:92] = OP_WAIT; w[31:0] = n; return w;
  endfunction
  function automatic seq_word_t w_do(int unsigned n);
    seq_word_t w = '0; w[95:92] = OP_DO; w[31:0] = n; return w;
  endfunction
  function automatic seq_word_t w_enddo();
    seq_word_t w = '0; w[95:92] = OP_ENDDO; return w;
  endfunction
  function automatic seq_word_t w_jmp(int unsigned a);
    seq_word_t w = '0; w[95:92] = OP_JMP; w[15:0] = 16'(a); return w;
  endfunction
endpackage
