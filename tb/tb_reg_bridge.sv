// tb_reg_bridge: self-checking test of the 16-bit to 8-bit register
// bridge. A 256-byte register model answers the register bus. Checks
// that a D16 write lands in registers 2n (high byte) and 2n+1 (low byte),
// that single-byte accesses touch one register only, read assembly, the
// even-then-odd order and the acknowledge latency (2 clocks for one
// byte, 3 for two).
module tb_reg_bridge;
  import vme_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        req_valid = 0, req_we = 0, ack;
  logic [7:1]  req_addr = '0;
  logic [1:0]  req_be = '0;
  logic [15:0] req_wdata = '0, rdata;
  reg_req_t    rq;
  logic [7:0]  regs [256];
  logic [7:0]  reg_rdata;
  int          nacc;
  logic [7:0]  order [4];

  reg_bridge dut (.clk, .rst_n, .req_valid, .req_we, .req_addr, .req_be, .req_wdata,
                  .ack, .rdata, .reg_req(rq), .reg_rdata);
  assign reg_rdata = regs[rq.addr];
  always_ff @(posedge clk) begin
    if (rq.wr) regs[rq.addr] <= rq.wdata;
    if (rq.wr || rq.rd) begin
      if (nacc < 4) order[nacc] <= rq.addr;
      nacc <= nacc + 1;
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input logic we, input logic [7:0] a, input logic [1:0] be,
                        input logic [15:0] wd, output logic [15:0] rd, output int lat);
    @(posedge clk);
    nacc = 0;
    req_valid <= 1; req_we <= we; req_addr <= a[7:1]; req_be <= be; req_wdata <= wd;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!ack);
    rd = rdata;
    req_valid <= 0;
    @(posedge clk);
  endtask

  logic [15:0] r;
  int lat;
  initial begin
    for (int i = 0; i < 256; i++) regs[i] = 8'(i ^ 8'h5A);
    nacc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    access(1, 8'h10, 2'b11, 16'hCAFE, r, lat);
    check(regs[8'h10] == 8'hCA && regs[8'h11] == 8'hFE, "D16 write: even=high, odd=low");
    check(lat == 4, $sformatf("two-byte ack latency %0d", lat));
    check(nacc == 2 && order[0] == 8'h10 && order[1] == 8'h11, "even byte first");
    access(1, 8'h21, 2'b01, 16'h0077, r, lat);
    check(regs[8'h21] == 8'h77 && regs[8'h20] == (8'h20 ^ 8'h5A), "odd byte only");
    check(lat == 3 && nacc == 1, $sformatf("one-byte latency %0d", lat));
    access(1, 8'h30, 2'b10, 16'h6600, r, lat);
    check(regs[8'h30] == 8'h66 && regs[8'h31] == (8'h31 ^ 8'h5A), "even byte only");
    access(0, 8'h10, 2'b11, 16'h0000, r, lat);
    check(r == 16'hCAFE, $sformatf("D16 read %h", r));
    access(0, 8'h40, 2'b01, 16'h0000, r, lat);
    check(r[7:0] == (8'h41 ^ 8'h5A), "odd byte read");
    access(0, 8'h40, 2'b10, 16'h0000, r, lat);
    check(r[15:8] == (8'h40 ^ 8'h5A), "even byte read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
