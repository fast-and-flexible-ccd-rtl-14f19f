// tb_dac_interface: self-checking test of dac_interface. Checks the reset
// code, that q takes the data on the edge ending a load cycle and keeps
// it while load is low, for random codes.
module tb_dac_interface;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0;
  logic [9:0] data = '0, q;
  dac_interface dut (.clk, .rst_n, .load, .data, .q);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [9:0] held;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(q == 10'h080, "reset code after reset");
    held = 10'h080;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      data = 10'($urandom);
      load = ($urandom_range(0, 2) == 0);
      @(negedge clk);
      if (load) held = data;
      load = 0;
      check(q == held, $sformatf("step %0d: q %h expected %h", i, q, held));
      data = ~data;
      @(negedge clk);
      check(q == held, "q holds without load");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
