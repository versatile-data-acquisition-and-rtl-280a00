// tb_vme_irq: self-checking test of the VME vectored interrupter.
//
// Raises interrupts from two sources and answers them with IACK cycles:
// at a foreign level (the cycle must be passed on IACKOUT* with no
// DTACK*), with D08(O) (status/ID in the low byte) and with D16 (all 16
// bits). Checks the request line, the vector with the source number in
// its low bits, lowest-source-first order, release on acknowledge and
// that a disabled source raises no request.
module tb_vme_irq;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  vme_master m(clk);
  logic [1:0]  src_pulse = '0, src_enable = 2'b11, pending;
  logic [2:0]  level = 3'd5;
  logic [15:0] d_out;
  logic        d_oe, dtack_n, iackout_n;
  logic [7:1]  irq_n;

  vme_irq #(.N_SRC(2)) dut (
    .clk, .rst_n, .src_pulse, .src_enable, .level, .vector_base(16'h9A78), .pending,
    .vme_as_n(m.as_n), .vme_ds_n(m.ds_n), .vme_iack_n(m.iack_n), .vme_iackin_n(m.iackin_n),
    .vme_addr(m.addr[3:1]), .vme_iackout_n(iackout_n), .vme_irq_n(irq_n),
    .vme_d_out(d_out), .vme_d_oe(d_oe), .vme_dtack_n(dtack_n));
  assign m.dtack_n = dtack_n;
  assign m.d_s     = d_oe ? d_out : 16'hFFFF;

  bit pass_seen = 0;
  always @(posedge clk) if (!iackout_n) pass_seen <= 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(input int s);
    @(posedge clk); src_pulse[s] <= 1'b1;
    @(posedge clk); src_pulse[s] <= 1'b0;
    @(posedge clk);
  endtask

  logic [15:0] v;
  bit got;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(irq_n == 7'h7F, "no request when idle");
    pulse(0);
    check(irq_n == 7'b1101111, $sformatf("IRQ5 asserted, irq_n=%b", irq_n));
    // foreign level: passed down the daisy chain
    m.tmo = 30;
    m.iack(3'd3, 2'b01, v, got);
    check(!got, "no DTACK at foreign level");
    check(pass_seen, "IACKOUT* asserted for foreign level");
    check(pending == 2'b01, "source still pending after foreign IACK");
    m.tmo = 400;
    // D08(O) acknowledge
    repeat (4) @(posedge clk);
    pass_seen = 0;
    m.iack(3'd5, 2'b01, v, got);
    check(got, "DTACK for own level");
    check(v[7:0] == 8'h78, $sformatf("D08 vector %h", v[7:0]));
    check(!pass_seen, "own IACK not passed on");
    check(pending == 2'b00 && irq_n == 7'h7F, "released on acknowledge");
    // two sources, D16: lowest first
    pulse(1); pulse(0);
    m.iack(3'd5, 2'b11, v, got);
    check(got && v == 16'h9A78, $sformatf("D16 vector first %h", v));
    check(irq_n[5] == 1'b0, "still requesting for second source");
    m.iack(3'd5, 2'b11, v, got);
    check(got && v == 16'h9A79, $sformatf("D16 vector second %h", v));
    check(irq_n == 7'h7F, "request released after both");
    // disabled source
    src_enable = 2'b01;
    pulse(1);
    check(irq_n == 7'h7F && pending == 2'b10, "disabled source pending but silent");
    src_enable = 2'b11;
    @(posedge clk);
    check(irq_n[5] == 1'b0, "enabled again: requesting");
    level = 3'd2;
    @(posedge clk);
    check(irq_n == 7'b1111101, "level change moves the request");
    m.iack(3'd2, 2'b01, v, got);
    check(got && v[7:0] == 8'h79, "D08 vector at level 2");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
