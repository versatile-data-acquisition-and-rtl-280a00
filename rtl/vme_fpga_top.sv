// vme_fpga_top: one VME board FPGA holding the standard VME interface and
// the application blocks of the laboratory's VME FPGA designs.
//
// The generic part is the VME slave (A16/A24, D08(EO)/D16, block
// transfer, read-modify-write) with a vectored interrupter. Behind it sit
// the applications, each reached through its 8-bit registers:
//   SCAM laser timing pulses (scam_pulse), injector high-voltage control
//   (hv_ctrl), the 30 Hz timing ring node (sync30_node), the Dual DSP
//   Board's arbitrated dual-port memory (mem_arbiter + dpram), the MPS
//   comparator's loss computation, SDRAM history buffer and fibre link
//   (mps_comparator, circ_buffer, mps_link), and the PLL module's I/Q
//   generator with encoders and read-back ADC (iq_calc, quad_decoder,
//   adc_scan).
// VME address map (board base set by jumpers):
//   A16, A15..A8 = base_a16:  register page, offset A7..A0
//   A24, A23..A20 = base_a24: 0x00000-0x1FFFF dual-port memory (128 KB)
//                             0x20000-0x3FFFF register page (aliased)
//                             0x80000-0xFFFFF SDRAM window, 512 KB, page
//                                             chosen by the buffer's PAGE
//                             elsewhere: acknowledged, reads as 0
// Register page (8-bit registers; a D16 access covers offsets 2n, 2n+1):
//   0x00 SCAM (7)      0x08 interrupter  0x10 HV (9)   0x20 30 Hz node (12)
//   0x30 buffer (7)    0x40 MPS (32)     0x60 I/Q (14) 0x70 ADC (18)
// Interrupter registers: 0x08 level (1..7), 0x09 source enables
// (bit0 30 Hz message, bit1 MPS shutdown), 0x0A/0x0B status/ID high/low,
// 0x0C pending sources (read-only). Board status, read-only: 0x0D
// samples skipped by the control-room link, 0x0E/0x0F phase/amplitude
// encoder errors.
// The slave's busy flag and the one-clock update/scan-done pulses of the
// I/Q generator and the ADC scanner are not needed at this level and are
// left unused; the same events can be seen in their registers.
// All blocks run on one clock. The external SDRAM and FLASH are reached
// through request/acknowledge and read ports; the DSPs, DACs, ADC,
// converters and fibre transceivers are outside the FPGA.
// The paper describes these applications as separate boards and notes
// that growing FPGAs let several designs share one device; gathering them
// in one FPGA, the address map and the single clock are this design's.
module vme_fpga_top
  import vme_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // VME backplane
  input  logic              vme_as_n,
  input  logic [1:0]        vme_ds_n,
  input  logic              vme_write_n,
  input  logic              vme_iack_n,
  input  logic              vme_iackin_n,
  input  logic [5:0]        vme_am,
  input  logic [23:1]       vme_addr,
  input  logic [15:0]       vme_d_in,
  output logic [15:0]       vme_d_out,
  output logic              vme_d_oe,
  output logic              vme_dtack_n,
  output logic              vme_iackout_n,
  output logic [7:1]        vme_irq_n,
  input  logic [7:0]        base_a16,     // jumpers: A15..A8
  input  logic [3:0]        base_a24,     // jumpers: A23..A20
  // SCAM
  input  logic              scam_trig,
  output logic [2:0]        laser_out,
  // injector HV
  input  logic [7:0]        hv_ilk_ok,
  input  logic              hv_vf_volt,
  input  logic              hv_vf_curr,
  output logic [15:0]       hv_dac_volt,
  output logic [15:0]       hv_dac_ilim,
  output logic              hv_supply_en,
  output logic [3:0]        hv_relay,
  // 30 Hz ring
  input  logic              ring_rx,
  output logic              ring_tx,
  input  logic [7:0]        ring_addr,    // jumpers
  output logic              sync_pulse,
  // two DSPs on the dual-port memory
  input  logic [1:0]        dsp_req,
  input  logic [1:0]        dsp_we,
  input  logic [1:0][1:0]   dsp_be,
  input  logic [1:0][15:0]  dsp_addr,
  input  logic [1:0][15:0]  dsp_wdata,
  output logic [1:0]        dsp_ack,
  output logic [15:0]       dsp_rdata,
  // MPS comparator
  input  logic [7:0][15:0]  p2_cur,
  input  logic              p2_valid,
  output logic              beam_permit,
  output logic [15:0]       loss_dac,
  output logic              mcc_tx,
  // SDRAM controller port
  output logic              sd_req,
  output logic              sd_we,
  output logic [1:0]        sd_be,
  output logic [21:0]       sd_addr,
  output logic [15:0]       sd_wdata,
  input  logic              sd_ack,
  input  logic [15:0]       sd_rdata,
  // PLL module
  output logic [11:0]       flash_addr,
  output logic              flash_rd,
  input  logic [15:0]       flash_data,
  output logic [13:0]       dac_i,
  output logic [13:0]       dac_q,
  input  logic              enc_ph_a,
  input  logic              enc_ph_b,
  input  logic              enc_am_a,
  input  logic              enc_am_b,
  output logic [2:0]        adc_ch,
  output logic              adc_convst,
  input  logic              adc_busy,
  input  logic [11:0]       adc_data
);

  // ------------------------------------------------------------------
  // VME slave and local-bus decode
  // ------------------------------------------------------------------
  lbus_req_t   lb;
  logic        lb_ack;
  logic [15:0] lb_rdata;
  logic [15:0] sl_d_out;
  logic        sl_d_oe, sl_dtack_n, sl_busy;

  vme_slave #(.A16_MASK(16'hFF00), .A24_MASK(24'hF00000)) u_vme (
    .clk, .rst_n,
    .vme_as_n, .vme_ds_n, .vme_write_n, .vme_iack_n, .vme_am, .vme_addr, .vme_d_in,
    .vme_d_out(sl_d_out), .vme_d_oe(sl_d_oe), .vme_dtack_n(sl_dtack_n),
    .base_a16({base_a16, 8'h00}), .base_a24({base_a24, 20'h00000}),
    .lb_req(lb), .lb_ack, .lb_rdata, .busy(sl_busy));

  typedef enum logic [1:0] {R_NONE, R_REG, R_DPRAM, R_SDRAM} region_e;
  region_e region;
  always_comb begin
    if (lb.space == SP_A16)       region = R_REG;
    else if (lb.addr[19])         region = R_SDRAM;
    else if (lb.addr[19:17] == 3'b000) region = R_DPRAM;
    else if (lb.addr[19:17] == 3'b001) region = R_REG;
    else                          region = R_NONE;
  end

  // register page
  reg_req_t    rq;
  logic [7:0]  rq_rdata;
  logic        rb_ack;
  logic [15:0] rb_rdata;
  reg_bridge u_bridge (
    .clk, .rst_n,
    .req_valid(lb.valid && region == R_REG), .req_we(lb.we), .req_addr(lb.addr[7:1]),
    .req_be(lb.be), .req_wdata(lb.wdata), .ack(rb_ack), .rdata(rb_rdata),
    .reg_req(rq), .reg_rdata(rq_rdata));

  // per-block register requests: strobes gated by block, offset relative
  function automatic reg_req_t sub(input reg_req_t r, input logic hit, input logic [7:0] base);
    reg_req_t o;
    o       = r;
    o.wr    = r.wr && hit;
    o.rd    = r.rd && hit;
    o.addr  = r.addr - base;
    return o;
  endfunction

  logic hit_scam, hit_irq, hit_hv, hit_sync, hit_buf, hit_mps, hit_iq, hit_adc;
  assign hit_scam = (rq.addr[7:3] == 5'b00000);
  assign hit_irq  = (rq.addr[7:3] == 5'b00001);
  assign hit_hv   = (rq.addr[7:4] == 4'h1);
  assign hit_sync = (rq.addr[7:4] == 4'h2);
  assign hit_buf  = (rq.addr[7:4] == 4'h3);
  assign hit_mps  = (rq.addr[7:5] == 3'b010);
  assign hit_iq   = (rq.addr[7:4] == 4'h6);
  assign hit_adc  = (rq.addr[7:4] == 4'h7) || (rq.addr[7:4] == 4'h8);

  logic [7:0] rd_scam, rd_irq, rd_hv, rd_sync, rd_buf, rd_mps, rd_iq, rd_adc;
  always_comb begin
    rq_rdata = 8'h00;
    if (hit_scam) rq_rdata = rd_scam;
    if (hit_irq)  rq_rdata = rd_irq;
    if (hit_hv)   rq_rdata = rd_hv;
    if (hit_sync) rq_rdata = rd_sync;
    if (hit_buf)  rq_rdata = rd_buf;
    if (hit_mps)  rq_rdata = rd_mps;
    if (hit_iq)   rq_rdata = rd_iq;
    if (hit_adc)  rq_rdata = rd_adc;
  end

  // ------------------------------------------------------------------
  // vectored interrupter and its registers
  // ------------------------------------------------------------------
  logic [2:0]  irq_level;
  logic [1:0]  irq_en, irq_pend, irq_src;
  logic [15:0] irq_vec;
  logic [15:0] iq_d_out;
  logic        iq_d_oe, iq_dtack_n;
  logic        sync_irq, mps_shutdown, shutdown_d;
  logic [7:0]  link_skipped, enc_ph_err, enc_am_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_level  <= '0;
      irq_en     <= '0;
      irq_vec    <= '0;
      shutdown_d <= 1'b0;
    end else begin
      shutdown_d <= mps_shutdown;
      if (rq.wr && hit_irq) begin
        unique case (rq.addr[2:0])
          3'd0: irq_level     <= rq.wdata[2:0];
          3'd1: irq_en        <= rq.wdata[1:0];
          3'd2: irq_vec[15:8] <= rq.wdata;
          3'd3: irq_vec[7:0]  <= rq.wdata;
          default: ;
        endcase
      end
    end
  end
  always_comb begin
    unique case (rq.addr[2:0])
      3'd0:    rd_irq = {5'd0, irq_level};
      3'd1:    rd_irq = {6'd0, irq_en};
      3'd2:    rd_irq = irq_vec[15:8];
      3'd3:    rd_irq = irq_vec[7:0];
      3'd4:    rd_irq = {6'd0, irq_pend};
      3'd5:    rd_irq = link_skipped;
      3'd6:    rd_irq = enc_ph_err;
      3'd7:    rd_irq = enc_am_err;
      default: rd_irq = 8'h00;
    endcase
  end
  assign irq_src = {mps_shutdown && !shutdown_d, sync_irq};

  vme_irq #(.N_SRC(2)) u_irq (
    .clk, .rst_n, .src_pulse(irq_src), .src_enable(irq_en), .level(irq_level),
    .vector_base(irq_vec), .pending(irq_pend),
    .vme_as_n, .vme_ds_n, .vme_iack_n, .vme_iackin_n, .vme_addr(vme_addr[3:1]),
    .vme_iackout_n, .vme_irq_n, .vme_d_out(iq_d_out), .vme_d_oe(iq_d_oe),
    .vme_dtack_n(iq_dtack_n));

  assign vme_dtack_n = sl_dtack_n && iq_dtack_n;
  assign vme_d_oe    = sl_d_oe || iq_d_oe;
  assign vme_d_out   = iq_d_oe ? iq_d_out : sl_d_out;

  // ------------------------------------------------------------------
  // SCAM and HV controller
  // ------------------------------------------------------------------
  scam_pulse u_scam (
    .clk, .rst_n, .rq(sub(rq, hit_scam, 8'h00)), .rdata(rd_scam),
    .trig_in(scam_trig), .laser_out);

  hv_ctrl u_hv (
    .clk, .rst_n, .rq(sub(rq, hit_hv, 8'h10)), .rdata(rd_hv),
    .ilk_ok(hv_ilk_ok), .vf_volt(hv_vf_volt), .vf_curr(hv_vf_curr),
    .dac_volt(hv_dac_volt), .dac_ilim(hv_dac_ilim), .supply_en(hv_supply_en),
    .relay(hv_relay));

  // ------------------------------------------------------------------
  // 30 Hz ring node
  // ------------------------------------------------------------------
  sync30_node u_sync (
    .clk, .rst_n, .rq(sub(rq, hit_sync, 8'h20)), .rdata(rd_sync),
    .my_addr(ring_addr), .ring_rx, .ring_tx, .sync_pulse, .irq(sync_irq));

  // ------------------------------------------------------------------
  // Dual DSP memory: port A to VME, port B to the DSPs via the arbiter
  // ------------------------------------------------------------------
  logic        dp_a_ack, dp_b_en, dp_b_we_l, dp_b_ack;
  logic [1:0]  dp_b_be;
  logic [15:0] dp_a_rdata, dp_b_addr, dp_b_wdata, dp_b_rdata;

  mem_arbiter #(.AW(16), .DW(16)) u_dsp_arb (
    .clk, .rst_n, .req(dsp_req), .we(dsp_we), .be(dsp_be), .addr(dsp_addr),
    .wdata(dsp_wdata), .ack(dsp_ack), .rdata(dsp_rdata),
    .m_req(dp_b_en), .m_we(dp_b_we_l), .m_be(dp_b_be), .m_addr(dp_b_addr),
    .m_wdata(dp_b_wdata), .m_ack(dp_b_ack), .m_rdata(dp_b_rdata));

  logic dp_a_en;
  assign dp_a_en = lb.valid && region == R_DPRAM;

  dpram #(.AW(16), .DW(16)) u_dpram (
    .clk, .rst_n,
    .a_en(dp_a_en), .a_we(lb.we ? lb.be : 2'b00), .a_addr(lb.addr[16:1]),
    .a_wdata(lb.wdata), .a_rdata(dp_a_rdata), .a_ack(dp_a_ack),
    .b_en(dp_b_en), .b_we(dp_b_we_l ? dp_b_be : 2'b00), .b_addr(dp_b_addr),
    .b_wdata(dp_b_wdata), .b_rdata(dp_b_rdata), .b_ack(dp_b_ack));

  // ------------------------------------------------------------------
  // MPS comparator, history buffer in SDRAM, fibre link
  // ------------------------------------------------------------------
  logic               loss_valid;
  logic signed [15:0] loss;
  logic [23:0]        integ;
  logic [7:0]         mps_status;
  logic [3:0]         sd_page;
  logic               cb_req, cb_ack_w;
  logic [21:0]        cb_addr;
  logic [15:0]        cb_wdata;

  mps_comparator u_mps (
    .clk, .rst_n, .rq(sub(rq, hit_mps, 8'h40)), .rdata(rd_mps),
    .cur(p2_cur), .cur_valid(p2_valid), .loss_valid, .loss, .integ,
    .status(mps_status), .shutdown(mps_shutdown), .dac_loss(loss_dac));
  assign beam_permit = !mps_shutdown;

  circ_buffer u_buf (
    .clk, .rst_n, .rq(sub(rq, hit_buf, 8'h30)), .rdata(rd_buf),
    .sample_valid(loss_valid), .loss(loss), .integ, .status_in(mps_status),
    .shutdown(mps_shutdown), .page(sd_page),
    .mem_req(cb_req), .mem_addr(cb_addr), .mem_wdata(cb_wdata), .mem_ack(cb_ack_w));

  mps_link u_link (
    .clk, .rst_n, .sample_valid(loss_valid), .loss(loss), .status(mps_status),
    .fiber_tx(mcc_tx), .skipped(link_skipped));

  // SDRAM port: master 0 = history buffer (writes), master 1 = VME window
  logic [1:0]  sd_m_ack;
  logic [15:0] sd_m_rdata;
  mem_arbiter #(.AW(22), .DW(16)) u_sd_arb (
    .clk, .rst_n,
    .req({lb.valid && region == R_SDRAM, cb_req}),
    .we({lb.we, 1'b1}),
    .be({lb.be, 2'b11}),
    .addr({{sd_page, lb.addr[18:1]}, cb_addr}),
    .wdata({lb.wdata, cb_wdata}),
    .ack(sd_m_ack), .rdata(sd_m_rdata),
    .m_req(sd_req), .m_we(sd_we), .m_be(sd_be), .m_addr(sd_addr),
    .m_wdata(sd_wdata), .m_ack(sd_ack), .m_rdata(sd_rdata));
  assign cb_ack_w = sd_m_ack[0];

  // ------------------------------------------------------------------
  // PLL module: encoders, I/Q generator, read-back ADC
  // ------------------------------------------------------------------
  logic [9:0] enc_phase, enc_amp;
  logic       iq_update, adc_done;

  quad_decoder #(.W(10)) u_enc_ph (
    .clk, .rst_n, .enc_a(enc_ph_a), .enc_b(enc_ph_b), .count(enc_phase), .errors(enc_ph_err));
  quad_decoder #(.W(10)) u_enc_am (
    .clk, .rst_n, .enc_a(enc_am_a), .enc_b(enc_am_b), .count(enc_amp), .errors(enc_am_err));

  iq_calc u_iq (
    .clk, .rst_n, .rq(sub(rq, hit_iq, 8'h60)), .rdata(rd_iq),
    .enc_phase, .enc_amp, .flash_addr, .flash_rd, .flash_data,
    .dac_i, .dac_q, .update(iq_update));

  adc_scan u_adc (
    .clk, .rst_n, .rq(sub(rq, hit_adc, 8'h70)), .rdata(rd_adc),
    .adc_ch, .adc_convst, .adc_busy, .adc_data, .scan_done(adc_done));

  // ------------------------------------------------------------------
  // local-bus acknowledge and read data
  // ------------------------------------------------------------------
  always_comb begin
    unique case (region)
      R_REG:   begin lb_ack = rb_ack;      lb_rdata = rb_rdata;   end
      R_DPRAM: begin lb_ack = dp_a_ack;    lb_rdata = dp_a_rdata; end
      R_SDRAM: begin lb_ack = sd_m_ack[1]; lb_rdata = sd_m_rdata; end
      default: begin lb_ack = lb.valid;    lb_rdata = 16'h0000;   end
    endcase
  end

endmodule
