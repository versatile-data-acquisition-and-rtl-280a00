// tb_hv_ctrl: self-checking test of the injector high-voltage controller.
// The testbench plays the supply: the V/F converter pulse rates are set
// directly. Checks the ramp (step size, rate and time to the set point),
// relay changes only while off, the over-current trip, the bleed-off
// timer, the refusal to restart while the voltage read-back is high,
// the latched trip and its reset, and the interlock trip latency.
module tb_hv_ctrl;
  import vme_pkg::*;
  localparam int RD = 4, BLEED = 300, GATE = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t    rq = '0;
  logic [7:0]  rdata;
  logic [1:0]  ilk = 2'b11;
  logic        vfv = 0, vfc = 0;
  logic [15:0] dac_volt, dac_ilim;
  logic        supply_en;
  logic [3:0]  relay;
  hv_ctrl #(.N_ILK(2), .RAMP_DIV(RD), .BLEED_CYCLES(BLEED), .VF_GATE(GATE),
            .BLED_LEVEL(16'd50)) dut (
    .clk, .rst_n, .rq, .rdata, .ilk_ok(ilk), .vf_volt(vfv), .vf_curr(vfc),
    .dac_volt, .dac_ilim, .supply_en, .relay);

  int vper = 0, cper = 0;   // V/F periods in clocks, 0 = silent
  always begin
    @(posedge clk);
    if (vper > 0) begin vfv <= 1; repeat (vper / 2) @(posedge clk); vfv <= 0; repeat (vper - vper / 2 - 1) @(posedge clk); end
  end
  always begin
    @(posedge clk);
    if (cper > 0) begin vfc <= 1; repeat (cper / 2) @(posedge clk); vfc <= 0; repeat (cper - cper / 2 - 1) @(posedge clk); end
  end

  task automatic wr(input logic [7:0] a, input logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(posedge clk); rq <= '0;
    #1;
  endtask
  task automatic rd(input logic [7:0] a, output logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 8'h00};
    #1 d = rdata;
    @(posedge clk); rq <= '0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] s;
  logic [15:0] prev;
  int t, bad_step;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    rd(8'd1, s);
    check(s[5] && s[6] && !s[0], $sformatf("ready after reset, status %b", s));
    wr(8'd2, 8'h00); wr(8'd3, 8'h01);      // set point 0x0100
    wr(8'd4, 8'd16);                       // ramp step
    wr(8'd5, 8'd1);                        // over-current at count > 0x1FF
    check(dac_ilim == 16'h0100, "current-limit DAC follows ILIM");
    wr(8'd0, 8'h50);                       // relays 0101, HV off
    repeat (3) @(posedge clk);
    check(relay == 4'b0101, "relays follow CTRL while off and bled");
    wr(8'd0, 8'h51);                       // HV on
    t = 0; bad_step = 0; prev = 0;
    while (dac_volt != 16'h0100 && t < 1000) begin
      @(posedge clk); #1; t++;
      if (dac_volt != prev && dac_volt - prev != 16) bad_step++;
      prev = dac_volt;
    end
    check(supply_en, "supply enabled");
    check(bad_step == 0, "ramp moves 16 codes per step");
    check(t >= 16 * RD - 2 && t <= 16 * RD + 3, $sformatf("ramp took %0d clocks", t));
    wr(8'd0, 8'hA1);                       // relay change while on is ignored
    repeat (3) @(posedge clk);
    check(relay == 4'b0101, "relays held while on");
    // ramp down to a lower set point
    wr(8'd3, 8'h00); wr(8'd2, 8'h40);
    repeat (20 * RD) @(posedge clk);
    check(dac_volt == 16'h0040, $sformatf("ramped down to %h", dac_volt));
    // over-current: about GATE/3 = 666 counts > 0x1FF
    vper = 4; cper = 3;
    t = 0;
    while (supply_en && t < 3 * GATE) begin @(posedge clk); t++; end
    check(!supply_en && dac_volt == 0, "over-current trips the supply");
    rd(8'd1, s);
    check(s[3] && s[4] && !s[5], $sformatf("over-current trip and bleeding, status %b", s));
    rd(8'd0, s);
    check(s[0] == 1'b0, "trip clears HV_ON");
    rd(8'd8, s);
    check(s == 8'd2, $sformatf("IMON high byte %0d", s));
    cper = 0;
    // voltage still high (vper = 4 -> 500 counts): not ready after bleed timer
    repeat (BLEED + 2 * GATE) @(posedge clk);
    wr(8'd0, 8'h01);
    repeat (10) @(posedge clk);
    check(!supply_en, "no restart while tripped and voltage high");
    rd(8'd1, s);
    check(!s[5], "not ready while voltage read-back high");
    vper = 0;                             // voltage bled away
    repeat (2 * GATE + 10) @(posedge clk);
    wr(8'd0, 8'h01);
    repeat (10) @(posedge clk);
    check(!supply_en, "latched trip still blocks restart");
    wr(8'd0, 8'h02);                      // trip reset
    rd(8'd1, s);
    check(s[5] && !s[3], $sformatf("ready after trip reset, status %b", s));
    wr(8'd0, 8'h01);
    repeat (5) @(posedge clk);
    check(supply_en, "restart after reset");
    // interlock: off within 3 clocks of the input falling
    @(posedge clk); ilk <= 2'b10;
    t = 0;
    do begin @(posedge clk); #1; t++; end while (supply_en && t < 20);
    check(t <= 3, $sformatf("interlock trip after %0d clocks", t));
    rd(8'd1, s);
    check(s[2] && !s[6], "interlock trip flagged");
    // bleed timer: cannot restart during bleed even with interlock back
    ilk <= 2'b11;
    repeat (3) @(posedge clk);
    wr(8'd0, 8'h02);
    wr(8'd0, 8'h01);
    repeat (20) @(posedge clk);
    check(!supply_en, "no restart during bleed-off time");
    repeat (BLEED) @(posedge clk);
    wr(8'd0, 8'h01);
    repeat (5) @(posedge clk);
    check(supply_en, "restart once bled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
