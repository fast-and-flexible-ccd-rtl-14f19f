// sram_model: behavioural model of a 512 K x 8 asynchronous SRAM
// (PD434008-class) for simulation only.
//
// Read: while ce_n and oe_n are low, dq_o shows mem[addr] at once.
// Write: the byte on dq_i is stored at addr on the rising edge of we_n
// while ce_n is low. The bus is split into dq_i / dq_o as in the FPGA
// ports; dq_oe (the FPGA driving the bus) is checked against oe_n.
module sram_model #(
  parameter int unsigned AW = 19
) (
  input  logic [AW-1:0] addr,
  input  logic [7:0]    dq_i,
  input  logic          dq_oe,
  output logic [7:0]    dq_o,
  input  logic          ce_n,
  input  logic          oe_n,
  input  logic          we_n
);
  logic [7:0] mem [2**AW];
  int unsigned writes = 0;

  assign dq_o = (!ce_n && !oe_n) ? mem[addr] : 8'h00;

  always @(posedge we_n) begin
    if (!ce_n) begin
      mem[addr] = dq_i;
      writes++;
    end
  end

  always @(addr or oe_n or dq_oe)
    if (dq_oe && !oe_n && !ce_n) $error("sram_model: bus driven by both sides");

  function automatic void poke(int unsigned a, logic [7:0] d);
    mem[a] = d;
  endfunction
  function automatic logic [7:0] peek(int unsigned a);
    return mem[a];
  endfunction
endmodule
