// tb_serial_tx: self-checking test of the serial byte transmitter.
// Sends random bytes, decodes the line independently by sampling each
// bit at its middle, and checks start bit, data (LSB first), stop bit,
// the busy time of exactly 10 bit times and that the line idles high.
module tb_serial_tx;
  localparam int CPB = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [7:0] data = '0;
  logic       start = 0, busy, tx;
  serial_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .data, .start, .busy, .tx);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] b, got;
  int tbusy;
  bit bad_start, bad_stop;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(tx == 1'b1, "idle line high");
    for (int k = 0; k < 12; k++) begin
      b = 8'($urandom);
      @(posedge clk); data <= b; start <= 1;
      @(posedge clk); start <= 0; data <= ~b;   // data need not be held
      // now tx shows the start bit; sample each bit in its middle
      #1;
      repeat (CPB / 2 - 1) @(posedge clk);
      bad_start = tx;
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        got[i] = tx;
      end
      repeat (CPB) @(posedge clk);
      bad_stop = !tx;
      check(!bad_start && !bad_stop && got == b, $sformatf("byte %h sent as %h", b, got));
      wait (!busy);
      @(posedge clk);
    end
    // busy length
    @(posedge clk); data <= 8'h55; start <= 1;
    @(posedge clk); start <= 0;
    tbusy = 0;
    #1;
    while (busy) begin @(posedge clk); #1; tbusy++; end
    check(tbusy == 10 * CPB, $sformatf("busy for %0d clocks", tbusy));
    check(tx == 1'b1, "line high after frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
