// tb_serial_rx: self-checking test of the serial byte receiver.
// Drives frames of random bytes onto the line, with the bit time off by
// a few percent, then a frame with a low stop bit and a short glitch.
// Checks each received byte, the framing-error pulse, that the glitch is
// not taken for a start bit, and the time of `valid` (middle of the stop
// bit plus the synchroniser).
module tb_serial_rx;
  localparam int CPB = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic       rx = 1;
  logic [7:0] data;
  logic       valid, ferr;
  serial_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx, .data, .valid, .frame_err(ferr));

  int nvalid = 0, nferr = 0;
  logic [7:0] last;
  always @(posedge clk) begin
    if (valid) begin nvalid++; last = data; end
    if (ferr) nferr++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input int bt, input bit stop);
    logic [9:0] f;
    f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx <= f[i];
      repeat (bt) @(posedge clk);
    end
    rx <= 1;
    repeat (bt) @(posedge clk);
  endtask

  logic [7:0] b;
  int n0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    for (int k = 0; k < 10; k++) begin
      b = 8'($urandom);
      n0 = nvalid;
      send(b, (k % 3 == 0) ? CPB - 1 : (k % 3 == 1) ? CPB + 1 : CPB, 1'b1);
      check(nvalid == n0 + 1 && last == b, $sformatf("byte %h received as %h", b, last));
    end
    check(nferr == 0, "no framing errors on good frames");
    send(8'hA5, CPB, 1'b0);
    check(nferr == 1, "framing error on a low stop bit");
    repeat (2 * CPB) @(posedge clk);
    n0 = nvalid;
    rx <= 0; repeat (3) @(posedge clk); rx <= 1;   // glitch
    repeat (12 * CPB) @(posedge clk);
    check(nvalid == n0 && nferr == 1, "glitch ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
