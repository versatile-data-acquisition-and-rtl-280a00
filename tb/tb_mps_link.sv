// tb_mps_link: self-checking test of the loss-data fibre link.
// Decodes the serial line independently and checks that each sample
// produces the frame A5, loss high, loss low, status; that a sample
// arriving during a frame is skipped and counted; and the frame time.
module tb_mps_link;
  localparam int CPB = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        sv = 0, tx;
  logic [15:0] loss = 0;
  logic [7:0]  st = 0, skipped;
  mps_link #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .sample_valid(sv), .loss, .status(st),
    .fiber_tx(tx), .skipped);

  // independent line decoder
  logic [7:0] rxq [$];
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge tx);
      if (!rst_n) continue;
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
      repeat (CPB) @(posedge clk);
      if (tx) rxq.push_back(b);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sample(input logic [15:0] l, input logic [7:0] s);
    @(posedge clk); sv <= 1; loss <= l; st <= s;
    @(posedge clk); sv <= 0;
  endtask

  int t;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int k = 0; k < 5; k++) begin
      logic [15:0] l;
      logic [7:0] s;
      l = 16'($urandom); s = 8'($urandom);
      sample(l, s);
      t = 0;
      while (rxq.size() < 4 && t < 60 * CPB) begin @(posedge clk); t++; end
      check(rxq.size() == 4 && rxq[0] == 8'hA5 && rxq[1] == l[15:8] && rxq[2] == l[7:0] && rxq[3] == s,
            $sformatf("frame %0d for loss %h status %h", k, l, s));
      // four 10-bit bytes: the decoder has the last byte at the middle of
      // its stop bit, 39.5 bit times plus 1-2 clocks after the sample
      check(t >= 39 * CPB && t <= 40 * CPB + 2, $sformatf("frame time %0d clocks", t));
      rxq.delete();
      repeat (2 * CPB) @(posedge clk);
    end
    check(skipped == 0, "nothing skipped at a slow rate");
    // samples faster than frames
    sample(16'h1234, 8'h01);
    repeat (10 * CPB) @(posedge clk);
    sample(16'h5678, 8'h02);
    repeat (50 * CPB) @(posedge clk);
    check(skipped == 1, $sformatf("skipped %0d", skipped));
    check(rxq.size() == 4 && rxq[1] == 8'h12, "first frame sent whole");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
