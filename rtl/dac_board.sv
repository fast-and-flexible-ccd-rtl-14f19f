// dac_board: behavioural model (not synthesizable) of one clock-driver
// channel on the DAC board: photo-coupler isolation, TLC7524 8-bit
// current-output DAC and output amplifier, seen from the 10-bit DAC port.
//
// The DAC takes the code on port[7:0] when the reference (latch) clock on
// port[8] rises, and after the settling time the amplifier output moves to
//     v = VMIN + code * (VMAX - VMIN) / 255     (volts),
// i.e. about 0.12 V per step over the usual -15 V .. +15 V range. port[9]
// is not used by an 8-bit DAC. The photo-coupler delay and the ~100 ns
// settling time are shorter than one sequencer clock and are not modelled:
// vout changes at the reference-clock edge. The 8-bit code, the latch on
// the reference clock and the -15 V .. +15 V range follow the paper; the
// linear code-to-volt map is this model's own.
module dac_board #(
  parameter real VMIN     = -15.0,
  parameter real VMAX     =  15.0
) (
  input  logic [9:0] port,
  output logic [7:0] code,      // code held in the DAC latch
  output real        vout       // clock voltage, volts
);

  initial begin
    code = 8'h80;
    vout = VMIN + 128.0 * (VMAX - VMIN) / 255.0;
  end

  logic unused_bit;
  assign unused_bit = port[9];     // free bit, for a future 10-bit DAC

  always @(posedge port[8]) begin
    code <= port[7:0];
    vout <= VMIN + real'(port[7:0]) * (VMAX - VMIN) / 255.0;
  end

endmodule
