// tb_quad_decoder: self-checking test of the optical encoder decoder.
// Turns a simulated encoder a random number of steps forward and back
// (x4 decoding: one count per edge) and checks the position against the
// step count, wrap-around at 2^W, and that a jump of both channels at
// once is counted as an error and not as a step.
module tb_quad_decoder;
  localparam int W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic a = 0, b = 0;
  logic [W-1:0] count;
  logic [7:0]   errors;
  quad_decoder #(.W(W)) dut (.clk, .rst_n, .enc_a(a), .enc_b(b), .count, .errors);

  // Gray sequence, A leading B going forward: 00 10 11 01
  logic [1:0] seq [4] = '{2'b00, 2'b10, 2'b11, 2'b01};
  int phase = 0;
  task automatic step(input bit fwd);
    phase = fwd ? (phase + 1) % 4 : (phase + 3) % 4;
    {a, b} = seq[phase];
    repeat ($urandom_range(3, 6)) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pos = 0, n;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int k = 0; k < 8; k++) begin
      n = $urandom_range(1, 40);
      for (int i = 0; i < n; i++) step(k % 2 == 0);
      pos += (k % 2 == 0) ? n : -n;
      repeat (4) @(posedge clk);
      check(count == W'(pos), $sformatf("position %0d, expected %0d", count, W'(pos)));
    end
    // wrap forward past 2^W
    for (int i = 0; i < 2 ** W + 5; i++) step(1);
    pos += 2 ** W + 5;
    repeat (4) @(posedge clk);
    check(count == W'(pos), "wraps at 2^W");
    check(errors == 0, "no errors on clean steps");
    // illegal jump: both channels change together
    {a, b} = ~{a, b};
    phase = (phase + 2) % 4;
    repeat (5) @(posedge clk);
    check(errors == 1 && count == W'(pos), "double change is an error, not a step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
