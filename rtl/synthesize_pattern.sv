// synthesize_pattern: builds one 96-bit sequencer word out of three 32-bit
// memory reads.
//
// On a start pulse the block takes the word address from the Clock
// Controller and asks the memory controller, three times in a row, for
// the 32-bit pieces 3*addr, 3*addr+1 and 3*addr+2. It keeps rd_req high
// and moves rd_addr on after each rd_ack, so the three reads run back to
// back (four SRAM cycles each). When the third piece arrives the pieces
// are joined, lowest first, into the 96-bit word, which is held on
// `pattern` and announced by a one-cycle `done` pulse.
//
// Timing: start in cycle 0, reads in cycles 1..12, done in cycle 13, i.e.
// the 13 steps per 96-bit pattern that the board description quotes. The
// three-reads-then-assemble scheme is the paper's; the cycle-level
// handshake is this design's.
module synthesize_pattern
  import ccd_pkg::*;
#(
  parameter int unsigned AW = SRAM_AW        // SRAM byte-address width
) (
  input  logic            clk,
  input  logic            rst_n,
  // from / to the Clock Controller
  input  logic            start,
  input  pc_t             word_addr,
  output logic            done,
  output seq_word_t       pattern,
  // to the memory controller read port
  output logic            rd_req,
  output logic [AW-3:0]   rd_addr,
  input  logic            rd_ack,
  input  logic [31:0]     rd_data
);

  logic [1:0]    piece;          // 0..2: piece being read
  logic [AW-3:0] base;           // 3 * word_addr
  logic [63:0]   lower;          // pieces 0 and 1
  logic          busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      piece   <= '0;
      base    <= '0;
      lower   <= '0;
      done    <= 1'b0;
      pattern <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          piece <= 2'd0;
          base  <= (AW-2)'(3 * 32'(word_addr));
        end
      end else if (rd_ack) begin
        unique case (piece)
          2'd0: lower[31:0]  <= rd_data;
          2'd1: lower[63:32] <= rd_data;
          default: begin
            pattern <= {rd_data, lower};
            done    <= 1'b1;
            busy    <= 1'b0;
          end
        endcase
        piece <= piece + 2'd1;
      end
    end
  end

  assign rd_req  = busy;
  assign rd_addr = base + (AW-2)'(piece);

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("synthesize_pattern: start while busy");

endmodule
