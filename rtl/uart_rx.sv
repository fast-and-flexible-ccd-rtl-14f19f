// uart_rx: asynchronous serial receiver, 8 data bits, no parity, 1 stop
// bit, least significant bit first (8N1).
//
// The line is synchronised with two flip-flops. A falling edge starts a
// frame; the start bit is checked at its middle and the eight data bits
// and the stop bit are sampled at their middles, CLK_HZ/BAUD cycles apart.
// A received byte appears on `data` with a one-cycle `valid` pulse in the
// cycle after the stop bit is sampled; a low stop bit gives a one-cycle
// `frame_err` pulse instead. The framing is a common choice for a serial
// link: the paper names the serial interface but not its format.
module uart_rx #(
  parameter int unsigned CLK_HZ = 4_000_000,
  parameter int unsigned BAUD   = 9_600
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);

  localparam int unsigned DIV  = (CLK_HZ + BAUD/2) / BAUD;   // cycles per bit
  localparam int unsigned HALF = DIV / 2;
  localparam int unsigned CW   = $clog2(DIV + 1);

  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_e;

  rx_state_e   state;
  logic [1:0]  sync;
  logic [CW-1:0] cnt;
  logic [2:0]  bit_idx;
  logic [7:0]  shift;

  wire rx = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= RX_IDLE;
      cnt       <= '0;
      bit_idx   <= '0;
      shift     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        RX_IDLE: if (!rx) begin
          cnt   <= CW'(HALF - 1);
          state <= RX_START;
        end
        RX_START: begin
          if (cnt == 0) begin
            if (!rx) begin
              cnt     <= CW'(DIV - 1);
              bit_idx <= '0;
              state   <= RX_DATA;
            end else begin
              state <= RX_IDLE;          // glitch, not a start bit
            end
          end else cnt <= cnt - 1'b1;
        end
        RX_DATA: begin
          if (cnt == 0) begin
            shift <= {rx, shift[7:1]};
            cnt   <= CW'(DIV - 1);
            if (bit_idx == 3'd7) state <= RX_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else cnt <= cnt - 1'b1;
        end
        RX_STOP: begin
          if (cnt == 0) begin
            if (rx) begin
              data  <= shift;
              valid <= 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
            state <= RX_IDLE;
          end else cnt <= cnt - 1'b1;
        end
        default: state <= RX_IDLE;
      endcase
    end
  end

endmodule
