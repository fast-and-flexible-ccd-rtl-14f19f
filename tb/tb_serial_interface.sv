// tb_serial_interface: self-checking test of serial_interface (with its
// uart_rx). The testbench sends 8N1 frames at CLK_HZ/BAUD = 10 cycles per
// bit and answers the byte-write port like a memory controller. It checks
// the address and data of every written byte of a load command, the stop
// pulse at its start and the single trigger after its last byte, the run
// and stop commands, an empty load, an ignored byte and a framing error.
module tb_serial_interface;
  import ccd_pkg::*;

  localparam int CLK_HZ = 1_000_000, BAUD = 100_000, BIT = CLK_HZ / BAUD;
  localparam int AW = 19;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rxd = 1;
  logic trigger, stop, wr_req, loading, frame_err;
  logic [AW-1:0] wr_addr;
  logic [7:0] wr_data;
  logic wr_ack = 0;

  serial_interface #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (
    .clk, .rst_n, .rxd, .trigger, .stop, .wr_req, .wr_addr, .wr_data, .wr_ack,
    .loading, .frame_err
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // memory side: acknowledge each request two cycles later, log the byte
  int          n_wr = 0;
  logic [AW-1:0] log_a [$];
  logic [7:0]  log_d [$];
  int triggers = 0, stops = 0, ferrs = 0;
  always @(posedge clk) begin
    if (rst_n && trigger) triggers++;
    if (rst_n && stop) stops++;
    if (rst_n && frame_err) ferrs++;
  end
  initial forever begin
    @(posedge clk);
    if (rst_n && wr_req && !wr_ack) begin
      @(posedge clk); @(posedge clk);
      #1 wr_ack = 1;
      log_a.push_back(wr_addr); log_d.push_back(wr_data); n_wr++;
      @(posedge clk); #1 wr_ack = 0;
    end
  end

  task automatic send(logic [7:0] b, bit good_stop = 1);
    rxd = 0; repeat (BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (BIT) @(posedge clk); end
    rxd = good_stop; repeat (BIT) @(posedge clk);
    rxd = 1; repeat (BIT) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] data [24];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!loading, "not loading after reset");
    // load 2 words at word address 5 -> bytes 60..83
    for (int i = 0; i < 24; i++) data[i] = 8'($urandom);
    send(CMD_LOAD);
    check(stops == 1, "load command stops the sequencer");
    check(loading, "loading during a load command");
    send(8'd5); send(8'd0); send(8'd2); send(8'd0);
    for (int i = 0; i < 24; i++) begin
      check(triggers == 0, "no trigger before the last byte");
      send(data[i]);
    end
    repeat (10) @(posedge clk);
    check(n_wr == 24, $sformatf("%0d bytes written, expected 24", n_wr));
    for (int i = 0; i < 24 && i < n_wr; i++)
      check(log_a[i] == AW'(60 + i) && log_d[i] == data[i],
            $sformatf("byte %0d written %h at %0d", i, log_d[i], log_a[i]));
    check(triggers == 1, "one trigger after the load");
    check(!loading, "load finished");
    // run and stop commands
    send(CMD_RUN);
    check(triggers == 2, "run command triggers");
    send(CMD_STOP);
    check(stops == 2, "stop command stops");
    // a byte that is no command does nothing
    send(8'h00);
    check(triggers == 2 && stops == 2 && n_wr == 24, "unknown byte ignored");
    // empty load: trigger at once, nothing written
    send(CMD_LOAD); send(8'd0); send(8'd0); send(8'd0); send(8'd0);
    check(triggers == 3 && n_wr == 24, "empty load triggers, writes nothing");
    // framing error
    send(CMD_RUN, 0);
    check(ferrs == 1, "framing error reported");
    check(triggers == 3, "bad frame ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
