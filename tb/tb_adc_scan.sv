// tb_adc_scan: self-checking test of the eight-channel ADC scanner.
// A model ADC converts the selected channel (value 0x100*ch + scan count)
// with a busy time; a channel whose busy never comes is also tested.
// Checks the channel order, the convert pulse, the stored results read
// as high-then-low bytes, the coherent low-byte latch, the scan counter
// and the timeout count.
module tb_adc_scan;
  import vme_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t    rq = '0;
  logic [7:0]  rdata;
  logic [2:0]  ch;
  logic        convst, busy = 0, done;
  logic [11:0] data = 0;
  adc_scan #(.N_CH(8), .DW(12), .SETTLE(4), .TIMEOUT(40)) dut (.clk, .rst_n, .rq, .rdata,
    .adc_ch(ch), .adc_convst(convst), .adc_busy(busy), .adc_data(data), .scan_done(done));

  int scans = 0, order_bad = 0, last_ch = 7;
  bit dead7 = 0;
  logic [11:0] model_val [8];
  always @(posedge clk) if (rst_n && done) scans++;
  // model ADC
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && convst) begin
        if (ch != 3'((last_ch + 1) % 8)) order_bad++;
        last_ch = ch;
        if (!(dead7 && ch == 7)) begin
          repeat (2) @(posedge clk);
          busy <= 1;
          repeat (10) @(posedge clk);
          data <= 12'(12'h100 * ch + scans);
          model_val[ch] = 12'(12'h100 * ch + scans);
          busy <= 0;
        end
      end
    end
  end

  task automatic rd(input logic [7:0] a, output logic [7:0] d);
    @(posedge clk); rq <= '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 8'h00};
    #1 d = rdata;
    @(posedge clk); rq <= '0;
    #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] hi, lo, n;
  int bad;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (scans == 3);
    @(negedge clk);
    bad = 0;
    for (int c = 0; c < 8; c++) begin
      logic [11:0] v;
      v = model_val[c];
      rd(8'(2 * c), hi);
      rd(8'(2 * c + 1), lo);
      if ({hi[3:0], lo} != v || hi[3:0] != 4'(c)) bad++;
    end
    check(bad == 0, $sformatf("%0d bad channel readings", bad));
    check(order_bad == 0, "channels converted in order");
    rd(8'd16, n);
    check(n >= 8'd3, "scan counter");
    // latch: read high, wait for a new scan, low still belongs to old value
    rd(8'd4, hi);
    wait (scans == 5);
    rd(8'd5, lo);
    check({hi[3:0], lo} == 12'h200 + 12'd2 || {hi[3:0], lo} == 12'h200 + 12'd3 || {hi[3:0], lo} == 12'h200 + 12'd4,
          $sformatf("coherent reading %h", {hi[3:0], lo}));
    // dead channel 7: timeout counted, scan continues
    dead7 = 1;
    wait (scans == 8);
    rd(8'd17, n);
    check(n >= 8'd2, $sformatf("timeouts %0d", n));
    dead7 = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
