// vme_master: testbench VME bus master (interface with tasks).
//
// Drives the master's side of the VME backplane in whole-clock steps and
// offers single cycles (write, read), block transfers (blt_write,
// blt_read), a read-modify-write cycle (rmw) and an interrupt-acknowledge
// cycle (iack) and a pair of writes with address pipelining
// (write_pipelined). Each data strobe waits for DTACK* for at most `tmo`
// clocks; a missing DTACK* sets `timeout`. `dtack_cycles` holds the clocks
// from the last data strobe to DTACK*.
interface vme_master (input logic clk);
  logic        as_n = 1'b1;
  logic [1:0]  ds_n = 2'b11;
  logic        write_n = 1'b1;
  logic        iack_n = 1'b1;
  logic        iackin_n = 1'b1;
  logic [5:0]  am = 6'h00;
  logic [23:1] addr = '0;
  logic [15:0] d_m = '0;       // master's data
  logic        dtack_n;        // from the slaves (wired-AND done by the TB)
  logic [15:0] d_s;            // slave's data
  int          tmo = 400;
  bit          timeout = 1'b0;
  int          dtack_cycles = 0;

  task automatic strobe(input logic [1:0] be);
    int n;
    ds_n = ~be;
    n = 0;
    while (dtack_n && n < tmo) begin @(posedge clk); n++; end
    dtack_cycles = n;
    if (n >= tmo) timeout = 1'b1;
  endtask

  task automatic release_ds();
    int n;
    @(posedge clk);
    ds_n = 2'b11;
    n = 0;
    while (!dtack_n && n < tmo) begin @(posedge clk); n++; end
    if (n >= tmo) timeout = 1'b1;
    @(posedge clk);
  endtask

  task automatic start(input logic [5:0] a_m, input logic [23:0] a, input logic ia);
    @(posedge clk);
    am = a_m; addr = a[23:1]; iack_n = ia;
    @(posedge clk);
    as_n = 1'b0;
    @(posedge clk);
  endtask

  task automatic finish_cycle();
    as_n = 1'b1; iack_n = 1'b1; write_n = 1'b1; iackin_n = 1'b1;
    @(posedge clk);
    @(posedge clk);
  endtask

  task automatic write(input logic [5:0] a_m, input logic [23:0] a, input logic [1:0] be,
                       input logic [15:0] d);
    start(a_m, a, 1'b1);
    write_n = 1'b0; d_m = d;
    strobe(be);
    release_ds();
    finish_cycle();
  endtask

  task automatic read(input logic [5:0] a_m, input logic [23:0] a, input logic [1:0] be,
                      output logic [15:0] d);
    start(a_m, a, 1'b1);
    write_n = 1'b1;
    strobe(be);
    @(posedge clk);
    d = d_s;
    release_ds();
    finish_cycle();
  endtask

  // two writes with address pipelining: the second address phase (AS*
  // high, new address, AS* low) happens while the first data strobe is
  // still held after DTACK*
  task automatic write_pipelined(input logic [5:0] a_m, input logic [23:0] a1,
                                 input logic [15:0] d1, input logic [23:0] a2,
                                 input logic [15:0] d2);
    start(a_m, a1, 1'b1);
    write_n = 1'b0; d_m = d1;
    strobe(2'b11);
    @(posedge clk);
    as_n = 1'b1;
    @(posedge clk);
    addr = a2[23:1];
    @(posedge clk);
    as_n = 1'b0;
    @(posedge clk);
    release_ds();
    d_m = d2;
    strobe(2'b11);
    release_ds();
    finish_cycle();
  endtask

  task automatic rmw(input logic [5:0] a_m, input logic [23:0] a, input logic [15:0] set_bits,
                     output logic [15:0] old);
    start(a_m, a, 1'b1);
    write_n = 1'b1;
    strobe(2'b11);
    @(posedge clk);
    old = d_s;
    release_ds();
    write_n = 1'b0; d_m = old | set_bits;
    strobe(2'b11);
    release_ds();
    finish_cycle();
  endtask

  task automatic blt_write(input logic [5:0] a_m, input logic [23:0] a, input int n,
                           input logic [15:0] d [16]);
    start(a_m, a, 1'b1);
    write_n = 1'b0;
    for (int i = 0; i < n; i++) begin
      d_m = d[i];
      strobe(2'b11);
      release_ds();
    end
    finish_cycle();
  endtask

  task automatic blt_read(input logic [5:0] a_m, input logic [23:0] a, input int n,
                          output logic [15:0] d [16]);
    start(a_m, a, 1'b1);
    write_n = 1'b1;
    for (int i = 0; i < n; i++) begin
      strobe(2'b11);
      @(posedge clk);
      d[i] = d_s;
      release_ds();
    end
    finish_cycle();
  endtask

  // interrupt acknowledge of `level`; got = 0 if nobody answered
  task automatic iack(input logic [2:0] level, input logic [1:0] be,
                      output logic [15:0] vec, output bit got);
    bit t0;
    start(6'h00, {20'h0, level, 1'b0}, 1'b0);
    iackin_n = 1'b0;
    write_n = 1'b1;
    t0 = timeout;
    strobe(be);
    got = !dtack_n;
    @(posedge clk);
    vec = d_s;
    if (got) release_ds();
    else begin ds_n = 2'b11; timeout = t0; end
    finish_cycle();
  endtask
endinterface
