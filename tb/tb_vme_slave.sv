// tb_vme_slave: self-checking test of the VME slave interface.
//
// A testbench bus master runs A24 and A16 single cycles in D16 and
// D08(EO), block transfers, a read-modify-write cycle, a pair of writes
// with address pipelining, and cycles to a foreign address and with a
// foreign address modifier (which must get no DTACK*). Behind the slave sits a 256-word memory model that answers
// after a random 0-3 clock latency; every local request is checked for
// address, space, byte enables and data. DTACK* latency is checked
// against the synchroniser and state-machine depth.
module tb_vme_slave;
  import vme_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  vme_master m(clk);
  lbus_req_t   lb;
  logic        lb_ack;
  logic [15:0] lb_rdata, d_out;
  logic        d_oe, dtack_n, busy;

  vme_slave dut (
    .clk, .rst_n, .vme_as_n(m.as_n), .vme_ds_n(m.ds_n), .vme_write_n(m.write_n),
    .vme_iack_n(m.iack_n), .vme_am(m.am), .vme_addr(m.addr), .vme_d_in(m.d_m),
    .vme_d_out(d_out), .vme_d_oe(d_oe), .vme_dtack_n(dtack_n),
    .base_a16(16'hC300), .base_a24(24'h500000),
    .lb_req(lb), .lb_ack, .lb_rdata, .busy);
  assign m.dtack_n = dtack_n;
  assign m.d_s     = d_oe ? d_out : 16'hFFFF;

  // local memory model
  logic [15:0] mem [256];
  int lat, wait_cnt, nreq;
  vme_space_e last_space;
  logic [23:1] last_addr;
  always_ff @(posedge clk) begin
    lb_ack <= 1'b0;
    if (lb.valid && !lb_ack) begin
      if (wait_cnt == lat) begin
        lb_ack <= 1'b1;
        lb_rdata <= mem[lb.addr[8:1]];
        if (lb.we) begin
          if (lb.be[1]) mem[lb.addr[8:1]][15:8] <= lb.wdata[15:8];
          if (lb.be[0]) mem[lb.addr[8:1]][7:0]  <= lb.wdata[7:0];
        end
        last_space <= lb.space;
        last_addr  <= lb.addr;
        nreq++;
        wait_cnt <= 0;
        lat <= $urandom_range(0, 3);
      end else wait_cnt <= wait_cnt + 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] r, old;
  logic [15:0] blk [16];
  logic [15:0] rb  [16];
  int n0;
  initial begin
    lat = 0; wait_cnt = 0; nreq = 0;
    for (int i = 0; i < 256; i++) mem[i] = 16'(i * 3);
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // A24 D16 write/read
    m.write(AM_A24_USR_D, 24'h500010, 2'b11, 16'hBEEF);
    check(!m.timeout, "A24 write got DTACK");
    check(mem[8] == 16'hBEEF, "A24 D16 write reached word 8");
    check(last_space == SP_A24 && last_addr == 23'h280008, "A24 local address and space");
    m.read(AM_A24_SUP_D, 24'h500010, 2'b11, r);
    check(r == 16'hBEEF, $sformatf("A24 D16 read back %h", r));
    // D08(EO): odd byte only (DS0) and even byte only (DS1)
    m.write(AM_A24_USR_D, 24'h500021, 2'b01, 16'h0012);
    check(mem[16] == {8'(16*3 >> 8), 8'h12}, $sformatf("D08 odd byte write %h", mem[16]));
    m.write(AM_A24_USR_D, 24'h500020, 2'b10, 16'h3400);
    check(mem[16] == 16'h3412, $sformatf("D08 even byte write %h", mem[16]));
    // A16
    m.write(AM_A16_USR, 24'h00C306, 2'b11, 16'h1234);
    check(mem[8'h83] == 16'h1234 && last_space == SP_A16 && last_addr == 23'h006183, "A16 write to C306");
    m.read(AM_A16_SUP, 24'h00C306, 2'b11, r);
    check(r == 16'h1234, "A16 read back");
    // DTACK latency with zero local latency: 2 sync + latch + req + ack state
    lat = 0;
    m.read(AM_A24_USR_D, 24'h500002, 2'b11, r);
    check(m.dtack_cycles >= 3 && m.dtack_cycles <= 9,
          $sformatf("DTACK after %0d clocks", m.dtack_cycles));
    // not selected: foreign base, A16 foreign, foreign AM (A32)
    n0 = nreq;
    m.tmo = 60;
    m.write(AM_A24_USR_D, 24'h600010, 2'b11, 16'h0BAD);
    check(m.timeout, "foreign A24 base gets no DTACK");
    m.timeout = 0;
    m.write(AM_A16_USR, 24'h00C406, 2'b11, 16'h0BAD);
    check(m.timeout, "foreign A16 base gets no DTACK");
    m.timeout = 0;
    m.write(6'h09, 24'h500010, 2'b11, 16'h0BAD);
    check(m.timeout, "A32 modifier gets no DTACK");
    m.timeout = 0;
    m.tmo = 400;
    check(nreq == n0 && mem[8] == 16'hBEEF, "no local request for foreign cycles");
    // block transfer write then read
    for (int i = 0; i < 16; i++) blk[i] = 16'hA000 + 16'(i * 17);
    m.blt_write(AM_A24_USR_B, 24'h500100, 8, blk);
    for (int i = 0; i < 8; i++)
      check(mem[128 + i] == blk[i], $sformatf("BLT write word %0d", i));
    m.blt_read(AM_A24_SUP_B, 24'h500100, 8, rb);
    for (int i = 0; i < 8; i++)
      check(rb[i] == blk[i], $sformatf("BLT read word %0d = %h", i, rb[i]));
    // non-block modifier with AS held: same address each strobe
    mem[64] = 16'h0001;
    m.rmw(AM_A24_USR_D, 24'h500080, 16'h8000, old);
    check(old == 16'h0001, "RMW read part");
    check(mem[64] == 16'h8001 && mem[65] != 16'h8001, "RMW write to same address");
    // address pipelining: the second address arrives during the first
    // cycle's data phase
    m.write_pipelined(AM_A24_USR_D, 24'h500040, 16'h1111, 24'h500050, 16'h2222);
    check(mem[32] == 16'h1111, "pipelined write, first address");
    check(mem[40] == 16'h2222, $sformatf("pipelined write, second address (%h)", mem[40]));
    check(!m.timeout, "no timeouts on answered cycles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
