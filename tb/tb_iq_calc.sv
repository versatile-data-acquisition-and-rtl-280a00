// tb_iq_calc: self-checking test of the I/Q set-point generator.
// A FLASH model holds sine, cosine and amplitude tables. For many
// amplitude/phase pairs, given over the register bus or through the
// encoder inputs, the testbench computes I = A sin(phase) and
// Q = A cos(phase) from the same table entries and checks both 14-bit
// DAC words, the register read-back of the words, and the update period
// of 5 + 3*(FLASH_WAIT+1) clocks.
module tb_iq_calc;
  import vme_pkg::*;
  localparam int PW = 10, FW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t    rq = '0;
  logic [7:0]  rdata;
  logic [PW-1:0] enc_phase = 0, enc_amp = 0;
  logic [PW+1:0] faddr;
  logic        frd, update;
  logic [15:0] fdata;
  logic [13:0] dac_i, dac_q;
  iq_calc #(.PW(PW), .AMPW(PW), .FLASH_WAIT(FW)) dut (.clk, .rst_n, .rq, .rdata,
    .enc_phase, .enc_amp, .flash_addr(faddr), .flash_rd(frd), .flash_data(fdata),
    .dac_i, .dac_q, .update);
  flash_model #(.PW(PW), .ACCESS(FW)) u_flash (.clk, .addr(faddr), .rd(frd), .data(fdata));

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

  function automatic logic [13:0] expect_dac(input int ph, input int am, input bit is_q);
    longint a, s, p;
    a = longint'(u_flash.rom[2 * 1024 + am]);
    s = longint'($signed(u_flash.rom[(is_q ? 1024 : 0) + ph]));
    p = (a * s) >>> 16;
    p = p >>> 2;
    return 14'(p) ^ 14'h2000;
  endfunction

  task automatic settle();
    repeat (2) @(posedge update);
    @(negedge clk);
  endtask

  int bad, ph, am, t;
  logic [7:0] lo, hi;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    bad = 0;
    for (int k = 0; k < 40; k++) begin
      ph = (k < 4) ? k * 256 : $urandom_range(0, 1023);
      am = (k == 0) ? 1023 : $urandom_range(0, 1023);
      wr(8'd1, 8'(ph)); wr(8'd2, 8'(ph >> 8));
      wr(8'd3, 8'(am)); wr(8'd4, 8'(am >> 8));
      settle();
      if (dac_i != expect_dac(ph, am, 0) || dac_q != expect_dac(ph, am, 1)) begin
        bad++;
        $display("ph %0d am %0d: I %h exp %h, Q %h exp %h", ph, am, dac_i, expect_dac(ph, am, 0), dac_q, expect_dac(ph, am, 1));
      end
    end
    check(bad == 0, $sformatf("%0d wrong I/Q pairs from VME", bad));
    // phase 0, full amplitude: I mid-scale, Q near full scale
    wr(8'd1, 8'd0); wr(8'd2, 8'd0); wr(8'd3, 8'hFF); wr(8'd4, 8'h03);
    settle();
    check(dac_i == 14'h2000 && dac_q > 14'h3700, $sformatf("phase 0: I %h Q %h", dac_i, dac_q));
    rd(8'd7, lo); rd(8'd8, hi);
    check({hi[5:0], lo} == dac_q, "Q read-back");
    // encoders as the source
    wr(8'd0, 8'h01);
    bad = 0;
    for (int k = 0; k < 10; k++) begin
      ph = $urandom_range(0, 1023); am = $urandom_range(0, 1023);
      enc_phase = 10'(ph); enc_amp = 10'(am);
      settle();
      if (dac_i != expect_dac(ph, am, 0) || dac_q != expect_dac(ph, am, 1)) bad++;
    end
    check(bad == 0, $sformatf("%0d wrong I/Q pairs from encoders", bad));
    rd(8'd9, lo);
    check(lo == 8'(ph), "phase in use read-back");
    // update period
    @(posedge update); @(negedge clk);
    t = 0;
    do begin @(posedge clk); #1; t++; end while (!update);
    check(t == 5 + 3 * FW, $sformatf("update period %0d", t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
