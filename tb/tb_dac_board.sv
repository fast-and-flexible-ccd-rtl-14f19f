// tb_dac_board: self-checking test of the dac_board model. Checks the
// power-up level, that the output does not follow the data bits until the
// reference clock (bit 8) rises, the code latched at that edge and the
// voltage against v = -15 + 30*code/255 for random codes and both ends of
// the range, and the 0.12 V step size.
module tb_dac_board;
  logic [9:0] port = 10'h000;
  logic [7:0] code;
  real vout;
  dac_board dut (.port, .code, .vout);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic bit near(real a, real b);
    return (a - b < 1.0e-6) && (b - a < 1.0e-6);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [7:0] c);
    logic [7:0] before_code;
    real before_v;
    before_code = code; before_v = vout;
    port = {2'b00, c}; #10;
    check(code == before_code && near(vout, before_v), "no change without reference clock");
    port[8] = 1'b1; #10;
    check(code == c, $sformatf("latched code %h expected %h", code, c));
    check(near(vout, -15.0 + 30.0 * real'(c) / 255.0),
          $sformatf("code %h: %f V expected %f V", c, vout, -15.0 + 30.0 * real'(c) / 255.0));
    port[8] = 1'b0; #10;
    port[7:0] = ~c; #10;
    check(code == c, "falling reference clock does not latch");
  endtask

  initial begin
    #1;
    check(code == 8'h80, "power-up code");
    apply(8'h00);
    check(near(vout, -15.0), "bottom of range -15 V");
    apply(8'hFF);
    check(near(vout, 15.0), "top of range +15 V");
    apply(8'h10);
    begin
      real v0;
      v0 = vout;
      apply(8'h11);
      check(vout - v0 > 0.117 && vout - v0 < 0.118, "one step is about 0.12 V");
    end
    for (int i = 0; i < 50; i++) apply(8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
