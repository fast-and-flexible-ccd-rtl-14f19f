// dio_fpga: the logic inside the FPGA of the digital I/O board.
//
// Five state machines share the work:
//   serial_interface    receives sequencer downloads from the host side,
//                       writes them to the SRAM and triggers the run;
//   clock_controller    walks the P-ram / V-ram words and sends every
//                       pattern to the output ports;
//   synthesize_pattern  builds each 96-bit word from three 32-bit reads;
//   memory_controller   owns the external 512 K x 8 SRAM;
//   display_controller  shows the Clock Controller status on the LCD.
// They drive eight 10-bit DAC ports (dac_interface) and the 10-bit
// parallel port to the ADC board (parallel_interface).
// Timing: one sequencer word takes 16 clock cycles to fetch and decode;
// a pattern then stays on the ports for the current `set wait` count of
// extra cycles. The partitioning and the port counts follow the paper;
// the external bus formats are this design's choice (see each block).
module dio_fpga
  import ccd_pkg::*;
#(
  parameter int unsigned CLK_HZ         = 4_000_000,
  parameter int unsigned BAUD           = 9_600,
  parameter int unsigned LOOP_DEPTH     = 4,
  parameter int unsigned LCD_POWERUP    = CLK_HZ / 1000 * 15,
  parameter int unsigned LCD_CMD        = CLK_HZ / 1000 / 20,
  parameter int unsigned LCD_CLEAR      = CLK_HZ / 1000 * 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // serial link from the host-side I/O board
  input  logic                      rxd,
  // SRAM
  output logic [SRAM_AW-1:0]        sram_addr,
  output logic [7:0]                sram_dq_o,
  input  logic [7:0]                sram_dq_i,
  output logic                      sram_dq_oe,
  output logic                      sram_ce_n,
  output logic                      sram_oe_n,
  output logic                      sram_we_n,
  // eight DAC ports and the parallel port
  output dac_code_t [N_DAC-1:0]     dac_port,
  output logic [PAR_BITS-1:0]       par_port,
  // liquid-crystal display
  output logic                      lcd_rs,
  output logic                      lcd_rw,
  output logic                      lcd_e,
  output logic [7:0]                lcd_d,
  // status
  output cc_status_t                status,
  output logic                      loading,
  output logic                      loop_overflow,
  output logic                      frame_err
);

  // serial interface <-> others
  logic                trigger, stop;
  logic                wr_req, wr_ack;
  logic [SRAM_AW-1:0]  wr_addr;
  logic [7:0]          wr_data;
  // synthesize pattern <-> memory controller
  logic                rd_req, rd_ack;
  logic [SRAM_AW-3:0]  rd_addr;
  logic [31:0]         rd_data;
  // clock controller <-> synthesize pattern
  logic                sp_start, sp_done;
  pc_t                 sp_addr;
  seq_word_t           sp_pattern;
  // clock controller -> ports
  logic                dac_load, par_load;
  dac_code_t [N_DAC-1:0] dac_data;
  logic [PAR_BITS-1:0] par_data;

  serial_interface #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_serial (
    .clk, .rst_n, .rxd, .trigger, .stop,
    .wr_req, .wr_addr, .wr_data, .wr_ack, .loading, .frame_err
  );

  memory_controller u_mem (
    .clk, .rst_n,
    .rd_req, .rd_addr, .rd_ack, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ack,
    .sram_addr, .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n
  );

  synthesize_pattern u_synth (
    .clk, .rst_n, .start(sp_start), .word_addr(sp_addr), .done(sp_done),
    .pattern(sp_pattern),
    .rd_req, .rd_addr, .rd_ack, .rd_data
  );

  clock_controller #(.LOOP_DEPTH(LOOP_DEPTH)) u_clock (
    .clk, .rst_n, .trigger, .stop,
    .sp_start, .sp_addr, .sp_done, .sp_pattern,
    .dac_load, .dac_data, .par_load, .par_data,
    .status, .loop_overflow
  );

  display_controller #(
    .CLK_HZ(CLK_HZ), .POWERUP_CYCLES(LCD_POWERUP),
    .CMD_CYCLES(LCD_CMD), .CLEAR_CYCLES(LCD_CLEAR)
  ) u_display (
    .clk, .rst_n, .status, .loading,
    .lcd_rs, .lcd_rw, .lcd_e, .lcd_d
  );

  for (genvar i = 0; i < N_DAC; i++) begin : g_dac
    dac_interface u_dac (
      .clk, .rst_n, .load(dac_load), .data(dac_data[i]),
      .q(dac_port[i])
    );
  end

  parallel_interface u_par (
    .clk, .rst_n, .load(par_load), .data(par_data), .q(par_port)
  );

endmodule
