// tb_circ_buffer: self-checking test of the circular history buffer.
// A 32-word buffer (8 records) is written through a memory model with a
// random latency. Checks each record's four words, the write pointer and
// its wrap with the WRAPPED flag, that the pointer then marks the oldest
// record, the overflow count for samples arriving too fast, the freeze at
// a shutdown sample and REARM, and the PAGE register.
module tb_circ_buffer;
  import vme_pkg::*;
  localparam int AW = 5, DEPTH = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t      rq = '0;
  logic [7:0]    rdata;
  logic          sv = 0, shutdown = 0, mem_req, mem_ack = 0;
  logic [15:0]   loss = 0, mem_wdata;
  logic [23:0]   integ = 0;
  logic [7:0]    st = 0;
  logic [3:0]    page;
  logic [AW-1:0] mem_addr;
  circ_buffer #(.AW(AW), .DEPTH_WORDS(DEPTH)) dut (.clk, .rst_n, .rq, .rdata,
    .sample_valid(sv), .loss, .integ, .status_in(st), .shutdown, .page,
    .mem_req, .mem_addr, .mem_wdata, .mem_ack);

  logic [15:0] mem [DEPTH];
  int w = 0, lat = 0;
  always @(posedge clk) begin
    mem_ack <= 1'b0;
    if (mem_req && !mem_ack) begin
      if (w >= lat) begin
        mem_ack <= 1'b1;
        mem[mem_addr] <= mem_wdata;
        w <= 0; lat <= $urandom_range(0, 2);
      end else w <= w + 1;
    end
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
    #1;
  endtask
  task automatic sample(input logic [15:0] l, input logic [23:0] ig, input logic [7:0] s,
                        input bit sd, input int gap);
    @(posedge clk); sv <= 1; loss <= l; integ <= ig; st <= s; shutdown <= sd;
    @(posedge clk); sv <= 0;
    repeat (gap) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] r, p;
  int bad;
  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = 16'hDEAD;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    sample(16'h1111, 24'h0, 8'h0, 0, 20);
    check(mem[0] == 16'hDEAD, "disabled: nothing written");
    wr(8'd0, 8'h01);                         // enable
    for (int k = 0; k < 6; k++) sample(16'h1000 + 16'(k), 24'hA00000 + 24'(k), 8'h40, 0, 20);
    bad = 0;
    for (int k = 0; k < 6; k++) begin
      if (mem[4*k]   != {8'h40, 8'(k)})   bad++;
      if (mem[4*k+1] != 16'h1000 + 16'(k)) bad++;
      if (mem[4*k+2] != 16'h00A0)          bad++;
      if (mem[4*k+3] != 16'(k))            bad++;
    end
    check(bad == 0, $sformatf("record contents: %0d bad words", bad));
    rd(8'd2, p); check(p == 8'd24, $sformatf("pointer %0d after 6 records", p));
    rd(8'd1, r); check(r[0] == 0, "not wrapped yet");
    for (int k = 6; k < 10; k++) sample(16'h1000 + 16'(k), 24'h0, 8'h40, 0, 20);
    rd(8'd1, r); check(r[0] == 1, "wrapped after 10 records");
    rd(8'd2, p); check(p == 8'd8, "pointer wraps to 8");
    check(mem[p] == {8'h40, 8'd2} && mem[0] == {8'h40, 8'd8}, "pointer marks the oldest record");
    // too fast: a second sample while the first is being written
    sample(16'h2222, 24'h0, 8'h00, 0, 0);
    sample(16'h3333, 24'h0, 8'h00, 0, 20);
    rd(8'd5, r); check(r == 8'd1, $sformatf("overflow count %0d", r));
    // freeze at shutdown
    wr(8'd0, 8'h03);
    sample(16'h4444, 24'h0, 8'h01, 1, 20);
    rd(8'd2, p);
    sample(16'h5555, 24'h0, 8'h01, 1, 20);
    rd(8'd2, r); check(r == p, "frozen after the shutdown record");
    rd(8'd1, r); check(r[1], "FROZEN flag");
    check(mem[(p + DEPTH - 3) % DEPTH] == 16'h4444, "shutdown record kept");
    wr(8'd0, 8'h07);                         // rearm
    sample(16'h6666, 24'h0, 8'h00, 0, 20);
    check(mem[(p + 1) % DEPTH] == 16'h6666, "writing again after REARM");
    wr(8'd6, 8'h0B);
    check(page == 4'hB, "PAGE register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
