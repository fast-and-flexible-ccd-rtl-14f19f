// dac_interface: one of the eight 10-bit DAC ports of the I/O board.
//
// The port is an output register in front of the connector to a DAC board.
// When the Clock Controller decodes a pattern it pulses `load` and the
// register takes the port's 10-bit field of that pattern, which then stays
// on the pins until the next pattern. With the present 8-bit DAC, bits
// [7:0] are the DAC code and bit 8 carries the DAC's latch (reference)
// clock, which the pattern compiler inserts into the code; bit 9 is free.
// All ten bits are driven so that a 10-bit DAC can be fitted later.
// Timing: q changes on the clock edge that ends the load cycle.
// The port count and width follow the paper; the register, its load
// strobe and the reset code are this design's own choice.
module dac_interface #(
  parameter int unsigned      WIDTH      = 10,
  parameter logic [WIDTH-1:0] RESET_CODE = WIDTH'(8'h80)  // about 0 V on a +-15 V board
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] data,
  output logic [WIDTH-1:0] q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= RESET_CODE;
    else if (load) q <= data;
  end

endmodule
