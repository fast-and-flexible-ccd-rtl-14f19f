// serial_interface: the download link from the host-side I/O board.
//
// Bytes arrive on an 8N1 asynchronous serial line (uart_rx). Commands:
//   'L' a_lo a_hi n_lo n_hi  d0 d1 ... d(12n-1)
//        load n sequencer words starting at word address a. The data
//        bytes are written to the SRAM one by one through the memory
//        controller's write port, starting at byte address 12*a. The
//        sequencer is stopped when the command starts, and when the last
//        byte is written a trigger pulse starts it again from word 0.
//   'R'  trigger: start the sequencer from word 0 without loading.
//   'S'  stop: send the sequencer back to idle.
// Other bytes in command position are ignored. `loading` is high while a
// command is being received or written.
//
// That the sequencers are downloaded through this block and that it then
// triggers the Clock Controller is the paper's; the byte framing, the
// command set and the baud rate are this design's own choice.
module serial_interface
  import ccd_pkg::*;
#(
  parameter int unsigned CLK_HZ = 4_000_000,
  parameter int unsigned BAUD   = 9_600,
  parameter int unsigned AW     = SRAM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rxd,
  // to the Clock Controller
  output logic          trigger,
  output logic          stop,
  // to the memory controller write port
  output logic          wr_req,
  output logic [AW-1:0] wr_addr,
  output logic [7:0]    wr_data,
  input  logic          wr_ack,
  // status
  output logic          loading,
  output logic          frame_err
);

  typedef enum logic [2:0] {SI_CMD, SI_A0, SI_A1, SI_N0, SI_N1, SI_DATA, SI_WRITE} si_state_e;

  si_state_e   state;
  logic [7:0]  rx_data;
  logic        rx_valid;
  logic [15:0] word_addr;
  logic [7:0]  cnt_lo;                    // low byte of the word count
  logic [AW:0] remaining;                 // bytes still to write

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_rx (
    .clk, .rst_n, .rxd, .data(rx_data), .valid(rx_valid), .frame_err
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= SI_CMD;
      trigger   <= 1'b0;
      stop      <= 1'b0;
      wr_req    <= 1'b0;
      wr_addr   <= '0;
      wr_data   <= '0;
      word_addr <= '0;
      cnt_lo    <= '0;
      remaining <= '0;
    end else begin
      trigger <= 1'b0;
      stop    <= 1'b0;
      unique case (state)
        SI_CMD: if (rx_valid) begin
          unique case (rx_data)
            CMD_LOAD: begin
              stop  <= 1'b1;
              state <= SI_A0;
            end
            CMD_RUN:  trigger <= 1'b1;
            CMD_STOP: stop    <= 1'b1;
            default: ;
          endcase
        end
        SI_A0: if (rx_valid) begin word_addr[7:0]  <= rx_data; state <= SI_A1; end
        SI_A1: if (rx_valid) begin word_addr[15:8] <= rx_data; state <= SI_N0; end
        SI_N0: if (rx_valid) begin cnt_lo          <= rx_data; state <= SI_N1; end
        SI_N1: if (rx_valid) begin
          wr_addr   <= AW'(32'(word_addr) * BYTES_PER_WORD);
          remaining <= (AW+1)'(32'({rx_data, cnt_lo}) * BYTES_PER_WORD);
          if ({rx_data, cnt_lo} == 16'd0) begin
            trigger <= 1'b1;
            state   <= SI_CMD;
          end else begin
            state <= SI_DATA;
          end
        end
        SI_DATA: if (rx_valid) begin
          wr_data <= rx_data;
          wr_req  <= 1'b1;
          state   <= SI_WRITE;
        end
        SI_WRITE: if (wr_ack) begin
          wr_req    <= 1'b0;
          wr_addr   <= wr_addr + 1'b1;
          remaining <= remaining - 1'b1;
          if (remaining == 1) begin
            trigger <= 1'b1;
            state   <= SI_CMD;
          end else begin
            state <= SI_DATA;
          end
        end
        default: state <= SI_CMD;
      endcase
    end
  end

  assign loading = (state != SI_CMD);

endmodule
