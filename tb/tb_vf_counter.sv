// tb_vf_counter: self-checking test of the V/F converter read-back.
// Feeds pulse trains of known period and checks that each gated count
// equals the number of rising edges inside the gate (within one, for the
// edge that straddles the gate boundary), that `valid` comes every
// GATE_CYCLES clocks, and that the count saturates.
module tb_vf_counter;
  localparam int GATE = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        f = 0;
  logic [7:0]  count;
  logic        valid;
  vf_counter #(.GATE_CYCLES(GATE), .W(8)) dut (.clk, .rst_n, .f_in(f), .count, .valid);

  int period = 10;
  always begin
    @(posedge clk);
    repeat (period / 2) @(posedge clk);
    f <= 1;
    repeat (period - period / 2) @(posedge clk);
    f <= 0;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_count(input int p);
    int exp, last, t;
    exp = GATE / (p + 1);   // the generator's period is p+1 clocks
    if (exp > 255) exp = 255;
    period = p;
    // skip one gate to settle
    @(posedge valid); @(negedge clk);
    t = 0;
    do begin @(posedge clk); #1; t++; end while (!valid);
    check(t == GATE, $sformatf("gate length %0d", t));
    #1;
    check(count >= exp - 1 && count <= exp + 1, $sformatf("period %0d: count %0d, expected %0d", p + 1, count, exp));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    expect_count(9);
    expect_count(19);
    expect_count(4);
    expect_count(2);     // 333 edges: saturates at 255
    check(count == 8'hFF, "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
