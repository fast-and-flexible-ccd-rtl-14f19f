// display_controller: shows the sequencer status on a 2 x 16 character
// liquid-crystal module with an HD44780-type 8-bit bus (RS, E, D[7:0];
// R/W tied to write).
//
// After a power-up delay it sends the initialisation commands (8-bit bus
// and two lines, display on, clear, cursor increment) and then rewrites
// both lines for ever. At the start of each refresh it takes a snapshot
// of the Clock Controller status, so one refresh shows one consistent
// state:
//   line 1  "SSSS PC=hhhh Dn "   state name, word address (hex),
//                                 do-loop depth
//   line 2  "PRAM LOAD       "   PRAM or VRAM (playing a V-ram), LOAD
//                                 while a download is running
// Each bus transfer is: RS and D set for one cycle, E high for E_CYCLES,
// then E low for the command's execution time (CMD_CYCLES, or CLEAR_CYCLES
// after a clear). The defaults give the HD44780 times at CLK_HZ.
// That the Clock Controller sends its state to this block, which drives
// the liquid-crystal display, is the paper's; the display type, the
// screen layout and the timing are this design's choice.
module display_controller
  import ccd_pkg::*;
#(
  parameter int unsigned CLK_HZ         = 4_000_000,
  parameter int unsigned POWERUP_CYCLES = CLK_HZ / 1000 * 15,     // 15 ms
  parameter int unsigned CMD_CYCLES     = CLK_HZ / 1000 / 20,     // 50 us
  parameter int unsigned CLEAR_CYCLES   = CLK_HZ / 1000 * 2,      // 2 ms
  parameter int unsigned E_CYCLES       = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  cc_status_t status,
  input  logic       loading,
  output logic       lcd_rs,
  output logic       lcd_rw,
  output logic       lcd_e,
  output logic [7:0] lcd_d
);

  localparam int unsigned N_INIT  = 4;
  localparam int unsigned N_ITEMS = N_INIT + 34;     // init + 2 x (address + 16 chars)
  localparam int unsigned CNTW    = 32;

  typedef enum logic [1:0] {LCD_POWERUP, LCD_SETUP, LCD_EHIGH, LCD_EXEC} lcd_state_e;

  lcd_state_e  state;
  logic [5:0]  item;
  logic [CNTW-1:0] cnt;
  cc_status_t  snap;
  logic        snap_loading;

  function automatic logic [7:0] hex_char(logic [3:0] v);
    return (v < 4'd10) ? (8'h30 + 8'(v)) : (8'h41 + 8'(v) - 8'd10);
  endfunction

  function automatic logic [31:0] state_name(cc_state_e s);
    unique case (s)
      CC_IDLE:   return "IDLE";
      CC_MEMCHK: return "MCHK";
      CC_FETCH:  return "FTCH";
      CC_DECODE: return "DECD";
      CC_WAIT:   return "WAIT";
      default:   return "????";
    endcase
  endfunction

  // Character at position pos (0..15) of line ln (0..1).
  function automatic logic [7:0] char_at(logic ln, logic [3:0] pos, cc_status_t s, logic ld);
    logic [31:0] nm;
    logic [127:0] l1, l2;
    nm = state_name(s.state);
    l1 = {nm, " PC=", hex_char(s.pc[15:12]), hex_char(s.pc[11:8]),
          hex_char(s.pc[7:4]), hex_char(s.pc[3:0]), " D", 8'h30 + 8'(s.loop_depth), " "};
    l2 = {(s.in_vram ? "VRAM" : "PRAM"), " ", (ld ? "LOAD" : "    "), "       "};
    return ln ? l2[8*(15-pos) +: 8] : l1[8*(15-pos) +: 8];
  endfunction

  // Item to send: {rs, byte, long delay}.
  logic       it_rs;
  logic [7:0] it_byte;
  logic       it_long;
  always_comb begin
    it_rs   = 1'b0;
    it_long = 1'b0;
    it_byte = 8'h00;
    if (item < 6'(N_INIT)) begin
      unique case (item[1:0])
        2'd0: it_byte = 8'h38;                      // 8-bit bus, 2 lines, 5x8 font
        2'd1: it_byte = 8'h0C;                      // display on, no cursor
        2'd2: begin it_byte = 8'h01; it_long = 1'b1; end   // clear
        default: it_byte = 8'h06;                   // increment, no shift
      endcase
    end else if (item == 6'(N_INIT)) begin
      it_byte = 8'h80;                              // line 1, column 0
    end else if (item == 6'(N_INIT + 17)) begin
      it_byte = 8'hC0;                              // line 2, column 0
    end else if (item < 6'(N_INIT + 17)) begin
      it_rs   = 1'b1;
      it_byte = char_at(1'b0, 4'(item - 6'(N_INIT + 1)), snap, snap_loading);
    end else begin
      it_rs   = 1'b1;
      it_byte = char_at(1'b1, 4'(item - 6'(N_INIT + 18)), snap, snap_loading);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= LCD_POWERUP;
      item         <= '0;
      cnt          <= CNTW'(POWERUP_CYCLES);
      snap         <= '0;
      snap_loading <= 1'b0;
      lcd_rs       <= 1'b0;
      lcd_e        <= 1'b0;
      lcd_d        <= '0;
    end else begin
      unique case (state)
        LCD_POWERUP: begin
          if (cnt == 0) state <= LCD_SETUP;
          else          cnt   <= cnt - 1'b1;
        end
        LCD_SETUP: begin
          lcd_rs <= it_rs;
          lcd_d  <= it_byte;
          cnt    <= CNTW'(E_CYCLES);
          state  <= LCD_EHIGH;
        end
        LCD_EHIGH: begin
          lcd_e <= 1'b1;
          if (cnt == 1) begin
            cnt   <= CNTW'(it_long ? CLEAR_CYCLES : CMD_CYCLES);
            state <= LCD_EXEC;
          end else cnt <= cnt - 1'b1;
        end
        LCD_EXEC: begin
          lcd_e <= 1'b0;
          if (cnt <= 1) begin
            state <= LCD_SETUP;
            if (item == 6'(N_ITEMS - 1)) item <= 6'(N_INIT);
            else                          item <= item + 1'b1;
            if (item == 6'(N_ITEMS - 1) || item == 6'(N_INIT - 1)) begin
              snap         <= status;      // new refresh starts
              snap_loading <= loading;
            end
          end else cnt <= cnt - 1'b1;
        end
        default: state <= LCD_POWERUP;
      endcase
    end
  end

  assign lcd_rw = 1'b0;

endmodule
