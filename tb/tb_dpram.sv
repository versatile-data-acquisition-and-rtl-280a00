// tb_dpram: self-checking test of the dual-port memory.
// Writes through one port and reads through the other with random
// addresses, data and byte enables against a reference copy; checks the
// one-clock read latency and acknowledge, the full 64 K-word address
// range, and simultaneous accesses on both ports.
module tb_dpram;
  localparam int AW = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic          a_en = 0, b_en = 0, a_ack, b_ack;
  logic [1:0]    a_we = 0, b_we = 0;
  logic [AW-1:0] a_addr = 0, b_addr = 0;
  logic [15:0]   a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  dpram #(.AW(AW), .DW(16)) dut (.clk, .rst_n, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata, .a_ack,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata, .b_ack);

  logic [15:0] ref_m [int];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nbad_ack;
  logic [AW-1:0] addrs [64];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    check(!a_ack && !b_ack, "no acknowledge after reset");
    // fill 64 random words through A, full words
    for (int k = 0; k < 64; k++) begin
      addrs[k] = (k == 0) ? '0 : (k == 1) ? '1 : AW'($urandom);
      @(posedge clk); a_en <= 1; a_we <= 2'b11; a_addr <= addrs[k]; a_wdata <= 16'($urandom);
      #1 ref_m[addrs[k]] = a_wdata;
    end
    @(posedge clk); a_en <= 0;
    // byte writes through B
    for (int k = 0; k < 64; k += 2) begin
      @(posedge clk); b_en <= 1; b_we <= (k % 4 == 0) ? 2'b01 : 2'b10; b_addr <= addrs[k]; b_wdata <= 16'($urandom);
      #1;
      if (b_we[0]) ref_m[addrs[k]][7:0]  = b_wdata[7:0];
      if (b_we[1]) ref_m[addrs[k]][15:8] = b_wdata[15:8];
    end
    @(posedge clk); b_en <= 0; b_we <= 0;
    // read back through both ports at once
    nbad_ack = 0;
    for (int k = 0; k < 64; k++) begin
      @(posedge clk); a_en <= 1; a_we <= 0; a_addr <= addrs[k];
      b_en <= 1; b_addr <= addrs[63 - k];
      @(posedge clk); a_en <= 0; b_en <= 0;
      #1;
      if (!a_ack || !b_ack) nbad_ack++;
      check(a_rdata == ref_m[addrs[k]], $sformatf("port A read %h: %h", addrs[k], a_rdata));
      check(b_rdata == ref_m[addrs[63 - k]], $sformatf("port B read %h: %h", addrs[63 - k], b_rdata));
    end
    check(nbad_ack == 0, "ack one clock after each access");
    @(posedge clk); #1;
    check(!a_ack && !b_ack, "ack drops when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
