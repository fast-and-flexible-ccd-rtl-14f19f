// parallel_interface: the 10-bit parallel port of the I/O board, which
// carries the HOLD (sample) clock and any other timing line for the ADC
// board.
//
// It is an output register loaded with the parallel field of each
// pattern when the Clock Controller pulses `load`; the lines then keep
// their level until the next pattern. Unlike a DAC port, which drives an
// analog level, every bit here is a logic line, so the register resets to
// all zeros (no HOLD). Timing: q changes on the edge that ends the load
// cycle. The 10-bit width and its use for HOLD follow the paper; the
// register, its reset value and the bit assignment (the pattern compiler
// puts HOLD on bit 0) are this design's own choice.
module parallel_interface #(
  parameter int unsigned WIDTH = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] data,
  output logic [WIDTH-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= data;
  end

endmodule
