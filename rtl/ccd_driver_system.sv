// ccd_driver_system: the CCD clock-driver system, i.e. the FPGA of the
// digital I/O board (dio_fpga) with one DAC-board channel (dac_board) on
// each of its eight DAC ports.
//
// Each CCD clock line (serial and vertical phases, reset gate, ...) is
// made by its own fast DAC, so one sequencer pattern sets both the
// timing and the voltage of every clock: a level changes whenever a
// pattern carries a new code with a rising reference-clock bit. The
// parallel port carries the HOLD line to the ADC board, which, like the
// SRAM, the host link and the display, sits outside and is reached
// through this module's ports. clk_v are the clock voltages in volts
// (a behavioural, non-synthesizable output of the DAC-board models).
// The structure is the paper's; see the blocks for the details that are
// this design's own choice.
module ccd_driver_system
  import ccd_pkg::*;
#(
  parameter int unsigned CLK_HZ      = 4_000_000,
  parameter int unsigned BAUD        = 9_600,
  parameter int unsigned LOOP_DEPTH  = 4,
  parameter int unsigned LCD_POWERUP = CLK_HZ / 1000 * 15,
  parameter int unsigned LCD_CMD     = CLK_HZ / 1000 / 20,
  parameter int unsigned LCD_CLEAR   = CLK_HZ / 1000 * 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rxd,
  output logic [SRAM_AW-1:0]    sram_addr,
  output logic [7:0]            sram_dq_o,
  input  logic [7:0]            sram_dq_i,
  output logic                  sram_dq_oe,
  output logic                  sram_ce_n,
  output logic                  sram_oe_n,
  output logic                  sram_we_n,
  output dac_code_t [N_DAC-1:0] dac_port,
  output logic [N_DAC*8-1:0]    dac_code,     // codes held in the DAC latches
  output real                   clk_v [N_DAC],
  output logic [PAR_BITS-1:0]   par_port,
  output logic                  lcd_rs,
  output logic                  lcd_rw,
  output logic                  lcd_e,
  output logic [7:0]            lcd_d,
  output cc_status_t            status,
  output logic                  loading,
  output logic                  loop_overflow,
  output logic                  frame_err
);

  dio_fpga #(
    .CLK_HZ(CLK_HZ), .BAUD(BAUD), .LOOP_DEPTH(LOOP_DEPTH),
    .LCD_POWERUP(LCD_POWERUP), .LCD_CMD(LCD_CMD), .LCD_CLEAR(LCD_CLEAR)
  ) u_fpga (
    .clk, .rst_n, .rxd,
    .sram_addr, .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n,
    .dac_port, .par_port,
    .lcd_rs, .lcd_rw, .lcd_e, .lcd_d,
    .status, .loading, .loop_overflow, .frame_err
  );

  for (genvar i = 0; i < N_DAC; i++) begin : g_board
    dac_board u_board (
      .port(dac_port[i]), .code(dac_code[8*i +: 8]), .vout(clk_v[i])
    );
  end

endmodule
