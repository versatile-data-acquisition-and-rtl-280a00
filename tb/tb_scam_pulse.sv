// tb_scam_pulse: self-checking test of the SCAM laser pulse generator.
// Programs the seven registers over the register bus, fires the trigger
// and measures, per laser channel, the clock at which the pulse starts
// and how long it lasts. Expected: start 3 + DELAY*TICK_DIV clocks after
// the trigger edge, length WIDTH*TICK_DIV clocks, nothing from a disabled
// channel or with zero width, and register read-back.
module tb_scam_pulse;
  import vme_pkg::*;
  localparam int TD = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t   rq = '0;
  logic [7:0] rdata;
  logic       trig = 0;
  logic [2:0] laser;
  scam_pulse #(.TICK_DIV(TD)) dut (.clk, .rst_n, .rq, .rdata, .trig_in(trig), .laser_out(laser));

  task automatic wr(input logic [7:0] a, input logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(posedge clk); rq <= '0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 8'h00};
    @(posedge clk); d = rdata; rq <= '0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t, first [3], len [3];
  task automatic fire_and_measure();
    for (int i = 0; i < 3; i++) begin first[i] = -1; len[i] = 0; end
    @(posedge clk); trig <= 1;
    for (t = 0; t < 1500; t++) begin
      @(posedge clk);
      #1;
      for (int i = 0; i < 3; i++)
        if (laser[i]) begin
          if (first[i] < 0) first[i] = t;
          len[i]++;
        end
      if (t == 20) trig <= 0;
    end
  endtask

  logic [7:0] r;
  int dly [3] = '{3, 10, 0};
  int wid [3] = '{5, 2, 4};
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3; i++) begin
      wr(8'(1 + i), 8'(dly[i]));
      wr(8'(4 + i), 8'(wid[i]));
    end
    wr(8'd0, 8'h03);            // channel 2 disabled
    rd(8'd5, r);
    check(r == 8'd2, "WIDTH[1] read-back");
    rd(8'd0, r);
    check(r == 8'h03, "CTRL read-back");
    fire_and_measure();
    for (int i = 0; i < 2; i++) begin
      check(first[i] == 3 + dly[i] * TD, $sformatf("ch%0d start %0d", i, first[i]));
      check(len[i] == wid[i] * TD, $sformatf("ch%0d length %0d", i, len[i]));
    end
    check(first[2] < 0, "disabled channel silent");
    // enable channel 2, zero width on channel 0
    wr(8'd0, 8'h07);
    wr(8'd4, 8'd0);
    fire_and_measure();
    check(first[0] < 0, "zero width gives no pulse");
    check(first[2] == 3 && len[2] == 4 * TD, $sformatf("ch2 start %0d len %0d", first[2], len[2]));
    check(first[1] == 3 + 10 * TD && len[1] == 2 * TD, "ch1 again after retrigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
