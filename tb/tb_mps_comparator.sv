// tb_mps_comparator: self-checking test of the beam-loss comparator.
// Feeds sample sets of eight currents and compares every result with a
// reference model computed here: the masked end-station sum, the loss
// (injector minus sum, saturated to 16 bits), the leaky integral clamped
// at zero, the loss DAC word, the per-channel limit trip and the
// integrated-loss trip, the latched shutdown and its clear, and the
// 2-clock latency from cur_valid to loss_valid.
module tb_mps_comparator;
  import vme_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t            rq = '0;
  logic [7:0]          rdata;
  logic [7:0][15:0]    cur = '0;
  logic                cur_valid = 0, loss_valid, shutdown;
  logic signed [15:0]  loss;
  logic [23:0]         integ;
  logic [7:0]          status;
  logic [15:0]         dac;
  mps_comparator dut (.clk, .rst_n, .rq, .rdata, .cur, .cur_valid, .loss_valid, .loss,
    .integ, .status, .shutdown, .dac_loss(dac));

  task automatic wr(input logic [7:0] a, input logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(posedge clk); rq <= '0;
    #1;
  endtask
  task automatic rd(input logic [7:0] a, output logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 8'h00};
    #1 d = rdata;
    @(posedge clk); rq <= '0;
    #1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  longint m_integ = 0;
  int     m_leak = 4;
  logic [7:0] m_mask = 8'hFE;
  int     lat;
  task automatic sample(input logic [7:0][15:0] c, output int exp_loss);
    longint s, l, li;
    s = 0;
    for (int i = 1; i < 8; i++) if (m_mask[i]) s += c[i];
    l = longint'(c[0]) - s;
    li = m_integ + l - (m_integ >> m_leak);
    if (li < 0) li = 0;
    if (li > 24'hFFFFFF) li = 24'hFFFFFF;
    m_integ = li;
    exp_loss = (l > 32767) ? 32767 : (l < -32768) ? -32768 : int'(l);
    @(posedge clk); cur <= c; cur_valid <= 1;
    @(posedge clk); cur_valid <= 0;
    lat = 1;
    while (!loss_valid) begin @(posedge clk); #1; lat++; end
  endtask

  logic [7:0][15:0] c;
  int e, bad_loss, bad_int, bad_dac, bad_lat;
  logic [7:0] r;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // limits high, trips enabled, integrated limit high
    wr(8'h00, 8'h01);
    wr(8'h05, 8'hFF); wr(8'h06, 8'hFF); wr(8'h07, 8'h7F);
    bad_loss = 0; bad_int = 0; bad_dac = 0; bad_lat = 0;
    for (int k = 0; k < 200; k++) begin
      if (k == 100) begin m_mask = 8'b1010_1010; wr(8'h02, m_mask); m_leak = 2; wr(8'h04, 8'd2); end
      for (int i = 0; i < 8; i++) c[i] = 16'($urandom_range(0, 9000));
      c[0] = 16'($urandom_range(20000, 65535));
      sample(c, e);
      if (loss != 16'(e)) bad_loss++;
      if (integ != 24'(m_integ)) bad_int++;
      if (dac != (16'(e) ^ 16'h8000)) bad_dac++;
      if (lat != 2) bad_lat++;
    end
    check(bad_loss == 0, $sformatf("loss mismatches %0d", bad_loss));
    check(bad_int == 0, $sformatf("integral mismatches %0d", bad_int));
    check(bad_dac == 0, $sformatf("DAC mismatches %0d", bad_dac));
    check(bad_lat == 0, $sformatf("latency errors %0d", bad_lat));
    check(!shutdown, "no trip below limits");
    rd(8'h08, r); check(r == loss[7:0], "loss register low byte");
    rd(8'h0B, r); check(r == integ[15:8], "integral register middle byte");
    // per-channel limit on end station 3 (masked out of the sum: still checked)
    wr(8'h16, 8'h10); wr(8'h17, 8'h00);     // LIMIT[3] = 0x0010
    c = '0; c[0] = 16'd100; c[3] = 16'd17;
    sample(c, e);
    check(shutdown && status[1], "limit trip");
    rd(8'h03, r); check(r == 8'b0000_1000, $sformatf("limit-tripped channel map %b", r));
    wr(8'h00, 8'h03);                        // clear
    check(!shutdown, "clear removes shutdown");
    m_integ = 0;
    wr(8'h16, 8'hFF); wr(8'h17, 8'hFF);
    // integrated-loss trip: steady loss 1000, leak 2 -> settles near 4000
    wr(8'h05, 8'hB8); wr(8'h06, 8'h0B); wr(8'h07, 8'h00);   // limit 3000
    c = '0; c[0] = 16'd1000;
    for (int k = 0; k < 3; k++) begin
      sample(c, e);
      check(integ == 24'(m_integ), "integral under steady loss");
    end
    check(!shutdown, "no integrated trip yet");
    for (int k = 0; k < 10; k++) sample(c, e);
    check(shutdown && status[2] && !status[1], "integrated-loss trip");
    // negative loss saturates and the integral returns to zero
    wr(8'h00, 8'h03);
    m_integ = 0;
    c = '0; c[1] = 16'hFFFF; c[3] = 16'hFFFF;
    sample(c, e);
    check(loss == -16'sd32768 && dac == 16'h0000 && integ == 0, "negative saturation, integral clamped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
