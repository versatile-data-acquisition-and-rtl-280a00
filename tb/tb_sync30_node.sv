// tb_sync30_node: self-checking test of the 30 Hz ring node.
// Three nodes form a ring: node 0 is the master (address 1), nodes 1 and
// 2 are repeaters with addresses 2 and 3. The master sends an addressed
// message and a broadcast. Checks that only the addressed node accepts
// the first, that all nodes accept the broadcast (the master when it
// comes back round), the stored message bytes, the broadcast and
// read-to-clear status bits, interrupts only where enabled, message
// counters, and the per-hop delay of the repeaters (one byte time).
module tb_sync30_node;
  import vme_pkg::*;
  localparam int CPB = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reg_req_t   rq [3];
  logic [7:0] rdata [3];
  logic [2:0] rx, tx, syncp, irq;
  logic [7:0] addrs [3] = '{8'd1, 8'd2, 8'd3};

  for (genvar i = 0; i < 3; i++) begin : g_node
    sync30_node #(.CLKS_PER_BIT(CPB)) u (
      .clk, .rst_n, .rq(rq[i]), .rdata(rdata[i]), .my_addr(addrs[i]),
      .ring_rx(rx[i]), .ring_tx(tx[i]), .sync_pulse(syncp[i]), .irq(irq[i]));
  end
  assign rx[1] = tx[0];
  assign rx[2] = tx[1];
  assign rx[0] = tx[2];

  int nsync [3], nirq [3];
  longint tsync [3];
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n)
    for (int i = 0; i < 3; i++) begin
      if (syncp[i]) begin nsync[i]++; tsync[i] = cyc; end
      if (irq[i]) nirq[i]++;
    end
  end

  task automatic wr(input int n, input logic [7:0] a, input logic [7:0] d);
    @(posedge clk); rq[n] <= '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(posedge clk); rq[n] <= '0;
    #1;
  endtask
  task automatic rd(input int n, input logic [7:0] a, output logic [7:0] d);
    @(posedge clk); rq[n] <= '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 8'h00};
    #1 d = rdata[n];
    @(posedge clk); rq[n] <= '0;
    #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] r;
  initial begin
    for (int i = 0; i < 3; i++) begin rq[i] = '0; nsync[i] = 0; nirq[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wr(0, 8'd0, 8'h02);          // node 0: master, no irq
    wr(1, 8'd0, 8'h01);          // node 1: irq enabled
    wr(2, 8'd0, 8'h01);          // node 2: irq enabled
    rd(2, 8'd2, r);
    check(r == 8'd3, "MYADDR shows jumpers");
    // addressed message to node 2 (address 3)
    wr(0, 8'd6, 8'd3); wr(0, 8'd7, 8'h5C); wr(0, 8'd8, 8'hE1);
    wr(0, 8'd9, 8'h01);
    rd(0, 8'd1, r);
    check(r[3], "master busy while sending");
    repeat (140 * CPB) @(posedge clk);
    check(nsync[2] == 1 && nirq[2] == 1, "addressed node accepted and interrupted");
    check(nsync[1] == 0 && nirq[1] == 0, "other repeater ignored the message");
    check(nsync[0] == 0, "master ignored its own returning message");
    rd(2, 8'd3, r); check(r == 8'd3, "RX address");
    rd(2, 8'd4, r); check(r == 8'h5C, "RX data 0");
    rd(2, 8'd5, r); check(r == 8'hE1, "RX data 1");
    rd(2, 8'd1, r); check(r[0] && !r[1], $sformatf("status received, not broadcast %b", r));
    rd(2, 8'd1, r); check(!r[0], "received flag clears on read");
    // broadcast
    wr(0, 8'd6, 8'd0); wr(0, 8'd7, 8'h30); wr(0, 8'd8, 8'h01);
    wr(0, 8'd9, 8'h01);
    repeat (140 * CPB) @(posedge clk);
    check(nsync[1] == 1 && nsync[2] == 2 && nsync[0] == 1, "broadcast accepted by all nodes");
    check(nirq[0] == 0 && nirq[1] == 1 && nirq[2] == 2, "interrupts only where enabled");
    check(tsync[2] - tsync[1] >= 10 * CPB - 2 && tsync[2] - tsync[1] <= 10 * CPB + 6,
          $sformatf("hop delay %0d clocks", tsync[2] - tsync[1]));
    rd(1, 8'd1, r); check(r[0] && r[1], "broadcast flag");
    rd(1, 8'd4, r); check(r == 8'h30, "broadcast data");
    rd(2, 8'd10, r); check(r == 8'd2, "RX counter");
    rd(1, 8'd11, r); check(r == 8'd0, "no errors");
    // slave cannot originate
    wr(1, 8'd9, 8'h01);
    repeat (60 * CPB) @(posedge clk);
    check(nsync[2] == 2, "repeater does not originate messages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
