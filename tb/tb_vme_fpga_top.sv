// tb_vme_fpga_top: end-to-end test of the whole board FPGA at its default
// sizes, driven from the VME bus as an EPICS input/output computer would.
//
// Models around the FPGA: a VME master, the SDRAM (8 MB), the FLASH with
// sine/cosine/amplitude tables, the read-back ADC, two DSPs on the
// dual-port memory, the V/F converters, the interlock chain, the 30 Hz
// ring (looped back so the board's own messages return to it) and a
// decoder on the MCC fibre.
// The test walks every application through one operation and counts each
// mechanism; a mechanism that never happened is a failure:
//   A16 and A24 cycles, D08 and D16, block transfer, read-modify-write,
//   address pipelining, an unmapped A24 address, DSP arbitration with
//   both DSPs waiting, SCAM pulse, HV ramp and interlock trip, 30 Hz
//   broadcast with interrupt and D08 IACK, MPS loss to DAC, SDRAM history
//   record read back over VME, buffer overflow and link skip, limit trip
//   with shutdown interrupt (D16 IACK) and buffer freeze, MCC frame, I/Q
//   from VME and from the encoder, ADC scan.
module tb_vme_fpga_top;
  import vme_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // mechanisms
  typedef enum int {M_A16, M_A24, M_D08, M_D16, M_BLT, M_RMW, M_PIPELINE, M_UNMAPPED, M_DSP_CONFLICT,
                    M_SCAM, M_HV_RAMP, M_HV_TRIP, M_RING_BCAST, M_IACK_D08, M_MPS_LOSS,
                    M_SDRAM_READBACK, M_BUF_OVERFLOW, M_LINK_SKIP, M_LIMIT_TRIP, M_IACK_D16, M_FREEZE,
                    M_MCC_FRAME, M_IQ_VME, M_IQ_ENC, M_ADC, M_NMECH} mech_e;
  int mech [M_NMECH];

  // ---------------- DUT and models ----------------
  vme_master m(clk);
  logic [15:0] vme_d_out;
  logic        vme_d_oe, vme_dtack_n, vme_iackout_n;
  logic [7:1]  vme_irq_n;
  logic        scam_trig = 0;
  logic [2:0]  laser_out;
  logic [7:0]  hv_ilk_ok = 8'hFF;
  logic        hv_vf_volt = 0, hv_vf_curr = 0;
  logic [15:0] hv_dac_volt, hv_dac_ilim;
  logic        hv_supply_en;
  logic [3:0]  hv_relay;
  logic        ring_tx, sync_pulse;
  logic [1:0]  dsp_req = 0, dsp_we = 0, dsp_ack;
  logic [1:0][1:0]  dsp_be = '0;
  logic [1:0][15:0] dsp_addr = '0, dsp_wdata = '0;
  logic [15:0] dsp_rdata;
  logic [7:0][15:0] p2_cur = '0;
  logic        p2_valid = 0, beam_permit, mcc_tx;
  logic [15:0] loss_dac;
  logic        sd_req, sd_we, sd_ack;
  logic [1:0]  sd_be;
  logic [21:0] sd_addr;
  logic [15:0] sd_wdata, sd_rdata;
  logic [11:0] flash_addr;
  logic        flash_rd;
  logic [15:0] flash_data;
  logic [13:0] dac_i, dac_q;
  logic        enc_ph_a = 0, enc_ph_b = 0;
  logic [2:0]  adc_ch;
  logic        adc_convst, adc_busy = 0;
  logic [11:0] adc_data = 0;

  vme_fpga_top dut (
    .clk, .rst_n,
    .vme_as_n(m.as_n), .vme_ds_n(m.ds_n), .vme_write_n(m.write_n), .vme_iack_n(m.iack_n),
    .vme_iackin_n(m.iackin_n), .vme_am(m.am), .vme_addr(m.addr), .vme_d_in(m.d_m),
    .vme_d_out, .vme_d_oe, .vme_dtack_n, .vme_iackout_n, .vme_irq_n,
    .base_a16(8'hC3), .base_a24(4'h5),
    .scam_trig, .laser_out,
    .hv_ilk_ok, .hv_vf_volt, .hv_vf_curr, .hv_dac_volt, .hv_dac_ilim, .hv_supply_en, .hv_relay,
    .ring_rx(ring_tx), .ring_tx, .ring_addr(8'h07), .sync_pulse,
    .dsp_req, .dsp_we, .dsp_be, .dsp_addr, .dsp_wdata, .dsp_ack, .dsp_rdata,
    .p2_cur, .p2_valid, .beam_permit, .loss_dac, .mcc_tx,
    .sd_req, .sd_we, .sd_be, .sd_addr, .sd_wdata, .sd_ack, .sd_rdata,
    .flash_addr, .flash_rd, .flash_data, .dac_i, .dac_q,
    .enc_ph_a, .enc_ph_b, .enc_am_a(1'b0), .enc_am_b(1'b0),
    .adc_ch, .adc_convst, .adc_busy, .adc_data);
  assign m.dtack_n = vme_dtack_n;
  assign m.d_s     = vme_d_oe ? vme_d_out : 16'hFFFF;

  sdram_model #(.AW(22), .LATENCY(3)) u_sdram (.clk, .req(sd_req), .we(sd_we), .be(sd_be),
    .addr(sd_addr), .wdata(sd_wdata), .ack(sd_ack), .rdata(sd_rdata));
  flash_model #(.PW(10), .ACCESS(2)) u_flash (.clk, .addr(flash_addr), .rd(flash_rd), .data(flash_data));

  // ADC model: channel n reads 0x100*n + 0x23
  always @(posedge clk) if (rst_n && adc_convst) fork
    begin
      logic [2:0] c;
      c = adc_ch;
      repeat (2) @(posedge clk); adc_busy <= 1;
      repeat (20) @(posedge clk); adc_data <= 12'h100 * c + 12'h23; adc_busy <= 0;
    end
  join_none

  // MCC fibre decoder (40 clocks per bit)
  logic [7:0] mcc_bytes [$];
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge mcc_tx);
      if (!rst_n) continue;
      repeat (20) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (40) @(posedge clk); b[i] = mcc_tx; end
      repeat (40) @(posedge clk);
      if (mcc_tx) mcc_bytes.push_back(b);
    end
  end

  int nsync = 0, scam_hi = 0;
  always @(posedge clk) if (rst_n) begin
    if (sync_pulse) nsync++;
    if (laser_out[0]) scam_hi++;
  end

  // ---------------- helpers ----------------
  localparam logic [23:0] A16B = 24'h00C300, REGS = 24'h520000, DPR = 24'h500000, SDW = 24'h580000;

  task automatic reg_w(input logic [7:0] off, input logic [7:0] d);
    m.write(AM_A16_USR, A16B | 24'(off), off[0] ? 2'b01 : 2'b10, {d, d});
    mech[M_A16]++; mech[M_D08]++;
  endtask
  task automatic reg_r(input logic [7:0] off, output logic [7:0] d);
    logic [15:0] w;
    m.read(AM_A16_SUP, A16B | 24'(off), off[0] ? 2'b01 : 2'b10, w);
    d = off[0] ? w[7:0] : w[15:8];
    mech[M_A16]++; mech[M_D08]++;
  endtask
  task automatic a24_w(input logic [23:0] a, input logic [15:0] d);
    m.write(AM_A24_USR_D, a, 2'b11, d);
    mech[M_A24]++; mech[M_D16]++;
  endtask
  task automatic a24_r(input logic [23:0] a, output logic [15:0] d);
    m.read(AM_A24_SUP_D, a, 2'b11, d);
    mech[M_A24]++; mech[M_D16]++;
  endtask
  task automatic dsp_access(input int i, input logic we, input logic [15:0] a,
                            input logic [15:0] d, output logic [15:0] r);
    @(posedge clk);
    dsp_req[i] <= 1; dsp_we[i] <= we; dsp_be[i] <= 2'b11; dsp_addr[i] <= a; dsp_wdata[i] <= d;
    do @(posedge clk); while (!dsp_ack[i]);
    r = dsp_rdata;
    dsp_req[i] <= 0;
  endtask
  task automatic p2_sample(input int inj, input int e1, input int e2, input int e3);
    @(posedge clk);
    p2_cur <= '0;
    p2_cur[0] <= 16'(inj); p2_cur[1] <= 16'(e1); p2_cur[2] <= 16'(e2); p2_cur[3] <= 16'(e3);
    p2_valid <= 1;
    @(posedge clk); p2_valid <= 0;
  endtask
  function automatic logic [13:0] iq_expect(input int ph, input int am, input bit is_q);
    longint a, s, p;
    a = longint'(u_flash.rom[2048 + am]);
    s = longint'($signed(u_flash.rom[(is_q ? 1024 : 0) + ph]));
    p = ((a * s) >>> 16) >>> 2;
    return 14'(p) ^ 14'h2000;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] w, r16;
  logic [7:0]  r8;
  logic [15:0] blk [16], rb [16];
  bit got;
  int t;
  initial begin
    for (int i = 0; i < M_NMECH; i++) mech[i] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // ---- SCAM: channel 0, delay 5, width 3 ticks ----
    reg_w(8'h01, 8'd5); reg_w(8'h04, 8'd3); reg_w(8'h00, 8'h01);
    m.read(AM_A16_USR, A16B | 24'h04, 2'b11, w);   // D16 read of WIDTH[0], WIDTH[1]
    check(w == 16'h0300, $sformatf("D16 register pair read %h", w));
    @(posedge clk); scam_trig <= 1; repeat (40) @(posedge clk); scam_trig <= 0;
    check(scam_hi == 3, $sformatf("SCAM pulse %0d clocks", scam_hi));
    if (scam_hi == 3) mech[M_SCAM]++;

    // ---- dual-port memory: VME and DSPs ----
    a24_w(DPR | 24'h10, 16'h1234);
    dsp_access(0, 0, 16'h0008, 16'h0, r16);
    check(r16 == 16'h1234, $sformatf("DSP0 reads VME data %h", r16));
    // both DSPs at once
    fork
      dsp_access(0, 1, 16'h0020, 16'hAAAA, r16);
      dsp_access(1, 1, 16'h0021, 16'hBBBB, w);
      begin
        repeat (2) @(posedge clk);
        if (dsp_req == 2'b11) mech[M_DSP_CONFLICT]++;
      end
    join
    dsp_access(1, 1, 16'h0022, 16'hCCCC, w);
    dsp_access(0, 1, 16'h0023, 16'hDDDD, w);
    m.blt_read(AM_A24_USR_B, DPR | 24'h40, 4, rb);
    check(rb[0] == 16'hAAAA && rb[1] == 16'hBBBB && rb[2] == 16'hCCCC && rb[3] == 16'hDDDD,
          $sformatf("BLT read of DSP data %h %h %h %h", rb[0], rb[1], rb[2], rb[3]));
    if (rb[3] == 16'hDDDD) mech[M_BLT]++;
    for (int i = 0; i < 16; i++) blk[i] = 16'h7000 + 16'(i);
    m.blt_write(AM_A24_SUP_B, DPR | 24'h1FFE0, 16, blk);  // top of the 128 KB
    dsp_access(1, 0, 16'hFFFF, 16'h0, r16);
    check(r16 == 16'h700F, $sformatf("last word of 128 KB %h", r16));
    m.rmw(AM_A24_USR_D, DPR | 24'h10, 16'h8000, w);
    a24_r(DPR | 24'h10, r16);
    check(w == 16'h1234 && r16 == 16'h9234, "read-modify-write on dual-port memory");
    if (r16 == 16'h9234) mech[M_RMW]++;
    // address pipelining: second address phase during the first data phase
    m.write_pipelined(AM_A24_USR_D, DPR | 24'h100, 16'h5A01, DPR | 24'h202, 16'h5A02);
    a24_r(DPR | 24'h100, r16);
    a24_r(DPR | 24'h202, w);
    check(r16 == 16'h5A01 && w == 16'h5A02, $sformatf("pipelined writes %h %h", r16, w));
    if (r16 == 16'h5A01 && w == 16'h5A02) mech[M_PIPELINE]++;
    // unmapped A24 address: acknowledged, reads 0
    a24_r(24'h540000, r16);
    check(!m.timeout && r16 == 16'h0000, "unmapped address answers 0");
    if (!m.timeout) mech[M_UNMAPPED]++;

    // ---- interrupter: level 3, both sources, vector 0x1240 ----
    reg_w(8'h08, 8'd3); reg_w(8'h09, 8'h03); reg_w(8'h0A, 8'h12); reg_w(8'h0B, 8'h40);

    // ---- 30 Hz ring: master, broadcast comes back round ----
    reg_w(8'h20, 8'h03);
    reg_w(8'h26, 8'h00); reg_w(8'h27, 8'h11); reg_w(8'h28, 8'h22); reg_w(8'h29, 8'h01);
    t = 0;
    while (vme_irq_n[3] && t < 5000) begin @(posedge clk); t++; end
    check(!vme_irq_n[3] && nsync == 1, "broadcast returned and raised IRQ3");
    reg_r(8'h24, r8);
    check(r8 == 8'h11, "received broadcast data");
    if (nsync == 1) mech[M_RING_BCAST]++;
    m.iack(3'd3, 2'b01, w, got);
    check(got && w[7:0] == 8'h40, $sformatf("D08 IACK vector %h", w[7:0]));
    if (got) mech[M_IACK_D08]++;
    check(vme_irq_n[3], "IRQ3 released");

    // ---- HV: ramp to 0x0200 in steps of 0x40, then interlock trip ----
    reg_w(8'h12, 8'h00); reg_w(8'h13, 8'h02); reg_w(8'h14, 8'h40); reg_w(8'h10, 8'h01);
    t = 0;
    while (hv_dac_volt != 16'h0200 && t < 20000) begin @(posedge clk); t++; end
    check(hv_supply_en && hv_dac_volt == 16'h0200 && t > 7000, $sformatf("HV ramp took %0d clocks", t));
    if (hv_dac_volt == 16'h0200) mech[M_HV_RAMP]++;
    @(posedge clk); hv_ilk_ok[5] <= 1'b0;
    repeat (4) @(posedge clk);
    check(!hv_supply_en && hv_dac_volt == 0, "interlock removes the supply");
    reg_r(8'h11, r8);
    check(r8[2], "interlock trip in status");
    if (r8[2]) mech[M_HV_TRIP]++;
    hv_ilk_ok[5] <= 1'b1;

    // ---- MPS: loss, buffer in SDRAM, MCC link ----
    reg_w(8'h40, 8'h01);                    // trips enabled
    reg_w(8'h30, 8'h03);                    // buffer on, freeze on shutdown
    for (int k = 0; k < 4; k++) begin
      p2_sample(5000, 1000, 1000, 1000);
      repeat (2000) @(posedge clk);
    end
    check(loss_dac == (16'd2000 ^ 16'h8000), $sformatf("loss DAC %h", loss_dac));
    if (loss_dac == (16'd2000 ^ 16'h8000)) mech[M_MPS_LOSS]++;
    reg_w(8'h36, 8'h00);                    // SDRAM page 0
    a24_r(SDW | 24'h12, r16);               // record 2, word 1 = loss
    check(r16 == 16'd2000, $sformatf("history record loss %0d", r16));
    a24_r(SDW | 24'h10, w);                 // record 2, word 0 = {status, seq}
    check(w[7:0] == 8'd2, "history record sequence");
    if (r16 == 16'd2000) mech[M_SDRAM_READBACK]++;
    reg_r(8'h32, r8);
    check(r8 == 8'd16, $sformatf("write pointer %0d", r8));
    check(mcc_bytes.size() >= 4 && mcc_bytes[0] == 8'hA5 && mcc_bytes[1] == 8'h07 && mcc_bytes[2] == 8'hD0,
          "MCC frame carries the loss");
    if (mcc_bytes.size() >= 4) mech[M_MCC_FRAME]++;
    // two samples back to back: the second is dropped
    p2_sample(5000, 1000, 1000, 1000);
    p2_sample(5000, 1000, 1000, 1000);
    repeat (2000) @(posedge clk);
    reg_r(8'h35, r8);
    check(r8 == 8'd1, $sformatf("overflow count %0d", r8));
    if (r8 != 0) mech[M_BUF_OVERFLOW]++;
    reg_r(8'h0D, r8);
    check(r8 == 8'd1, $sformatf("control-room link skipped %0d", r8));
    if (r8 != 0) mech[M_LINK_SKIP]++;
    // limit on end station 2 = 500: trip, shutdown interrupt, freeze
    reg_w(8'h54, 8'hF4); reg_w(8'h55, 8'h01);
    p2_sample(5000, 1000, 1000, 1000);
    repeat (200) @(posedge clk);
    check(!beam_permit, "limit trip removes beam permit");
    reg_r(8'h43, r8);
    check(r8 == 8'h04, $sformatf("tripped channel map %b", r8));
    if (!beam_permit) mech[M_LIMIT_TRIP]++;
    check(!vme_irq_n[3], "shutdown interrupt");
    m.iack(3'd3, 2'b11, w, got);
    check(got && w == 16'h1241, $sformatf("D16 IACK vector %h", w));
    if (got) mech[M_IACK_D16]++;
    p2_sample(5000, 1000, 1000, 1000);
    repeat (200) @(posedge clk);
    reg_r(8'h31, r8);
    check(r8[1], "buffer frozen after shutdown");
    reg_r(8'h32, r8);
    check(r8 == 8'd24, $sformatf("pointer stays at %0d", r8));
    if (r8 == 8'd24) mech[M_FREEZE]++;

    // ---- PLL: I/Q from VME (phase 90 deg, amplitude 1023) ----
    reg_w(8'h61, 8'h00); reg_w(8'h62, 8'h01); reg_w(8'h63, 8'hFF); reg_w(8'h64, 8'h03);
    repeat (60) @(posedge clk);
    check(dac_i == iq_expect(256, 1023, 0) && dac_q == iq_expect(256, 1023, 1),
          $sformatf("I/Q from VME: %h %h", dac_i, dac_q));
    if (dac_i == iq_expect(256, 1023, 0)) mech[M_IQ_VME]++;
    // encoder: 4 steps forward on the phase knob, amplitude encoder at 0
    reg_w(8'h60, 8'h01);
    {enc_ph_a, enc_ph_b} = 2'b10; repeat (6) @(posedge clk);
    {enc_ph_a, enc_ph_b} = 2'b11; repeat (6) @(posedge clk);
    {enc_ph_a, enc_ph_b} = 2'b01; repeat (6) @(posedge clk);
    {enc_ph_a, enc_ph_b} = 2'b00; repeat (60) @(posedge clk);
    reg_r(8'h69, r8);
    check(r8 == 8'd4, $sformatf("encoder phase %0d", r8));
    check(dac_i == iq_expect(4, 0, 0) && dac_q == iq_expect(4, 0, 1), "I/Q from encoders");
    if (r8 == 8'd4) mech[M_IQ_ENC]++;

    // ---- ADC read-back: channel 5 as one D16 read ----
    repeat (400) @(posedge clk);
    m.read(AM_A16_USR, A16B | 24'h7A, 2'b11, w);
    check(w == 16'h0523, $sformatf("ADC channel 5 = %h", w));
    if (w == 16'h0523) mech[M_ADC]++;

    check(!m.timeout, "no VME timeouts");
    for (int i = 0; i < M_NMECH; i++) begin
      mech_e e;
      e = mech_e'(i);
      $display("mechanism %-18s %0d", e.name(), mech[i]);
      check(mech[i] > 0, $sformatf("mechanism %s happened", e.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
