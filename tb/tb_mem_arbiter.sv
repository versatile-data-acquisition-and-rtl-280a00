// tb_mem_arbiter: self-checking test of the two-master memory arbiter.
// Two masters issue random reads and writes (with byte enables) to a
// memory model that answers after a random latency; a shadow copy in the
// testbench gives the expected read data. Checks every read, that the
// masters are served alternately while both wait (round robin), that an
// idle master does not hold up the other, and the 3-clock access time
// with a one-clock memory.
module tb_mem_arbiter;
  localparam int AW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [1:0]           req = '0, we = '0, ack;
  logic [1:0][1:0]      be = '0;
  logic [1:0][AW-1:0]   addr = '0;
  logic [1:0][15:0]     wdata = '0;
  logic [15:0]          rdata;
  logic                 m_req, m_we, m_ack;
  logic [1:0]           m_be;
  logic [AW-1:0]        m_addr;
  logic [15:0]          m_wdata, m_rdata;

  mem_arbiter #(.AW(AW), .DW(16)) dut (.clk, .rst_n, .req, .we, .be, .addr, .wdata, .ack, .rdata,
    .m_req, .m_we, .m_be, .m_addr, .m_wdata, .m_ack, .m_rdata);

  logic [15:0] mem [2**AW];
  logic [15:0] shadow [2**AW];
  int lat = 0, w = 0, maxlat = 3;
  always @(posedge clk) begin
    m_ack <= 1'b0;
    if (m_req && !m_ack) begin
      if (w >= lat) begin
        m_ack <= 1'b1;
        m_rdata <= mem[m_addr];
        if (m_we) begin
          if (m_be[1]) mem[m_addr][15:8] <= m_wdata[15:8];
          if (m_be[0]) mem[m_addr][7:0]  <= m_wdata[7:0];
        end
        w <= 0;
        lat <= $urandom_range(0, maxlat);
      end else w <= w + 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nack [2];
  int order [$];
  always @(posedge clk) if (rst_n) for (int i = 0; i < 2; i++) if (ack[i]) begin nack[i]++; order.push_back(i); end

  // master i: n random accesses to its own half of the memory
  int bad [2];
  task automatic master(input int i, input int n);
    logic [AW-1:0] a;
    logic [1:0] b;
    logic [15:0] d;
    bit isw;
    for (int k = 0; k < n; k++) begin
      a = {1'(i), (AW-1)'($urandom)};
      isw = $urandom_range(0, 1);
      b = isw ? 2'($urandom_range(1, 3)) : 2'b11;
      d = 16'($urandom);
      @(posedge clk);
      req[i] <= 1; we[i] <= isw; be[i] <= b; addr[i] <= a; wdata[i] <= d;
      do @(posedge clk); while (!ack[i]);
      if (!isw) begin
        check(rdata == shadow[a], $sformatf("master %0d read %h: %h, expected %h", i, a, rdata, shadow[a]));
        if (rdata != shadow[a]) bad[i]++;
      end
      if (isw) begin
        if (b[1]) shadow[a][15:8] = d[15:8];
        if (b[0]) shadow[a][7:0]  = d[7:0];
      end
      req[i] <= 0;
    end
  endtask

  int t, alt;
  initial begin
    for (int i = 0; i < 2**AW; i++) begin mem[i] = 16'(i * 7); shadow[i] = 16'(i * 7); end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      master(0, 300);
      master(1, 300);
    join
    @(posedge clk); #1;
    check(bad[0] == 0 && bad[1] == 0, $sformatf("read data errors %0d %0d", bad[0], bad[1]));
    check(nack[0] == 300 && nack[1] == 300, $sformatf("every access acknowledged once: %0d %0d", nack[0], nack[1]));
    // both masters requesting permanently: strict alternation
    order.delete();
    maxlat = 0;
    repeat (5) @(posedge clk);
    req <= 2'b11; we <= 2'b00; addr <= '0;
    repeat (60) @(posedge clk);
    req <= 2'b00;
    repeat (5) @(posedge clk);
    alt = 0;
    for (int k = 1; k < order.size(); k++) if (order[k] != order[k-1]) alt++;
    check(order.size() >= 10 && alt == order.size() - 1, $sformatf("round robin: %0d grants, %0d alternations", order.size(), alt));
    // single master, one-clock memory: 3 clocks per access
    @(posedge clk); req[0] <= 1; we[0] <= 0; addr[0] <= 8'h05;
    t = 0;
    do begin @(posedge clk); t++; end while (!ack[0]);
    req[0] <= 0;
    // req sampled at the first edge, ack seen at the fourth: 3 clocks
    check(t == 4, $sformatf("access time %0d", t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
