// iq_calc: in-phase / quadrature set-point generator of the PLL module.
//
// The operator gives an amplitude and a phase, either over VME (registers)
// or from two local optical encoders (enc_phase, enc_amp, see
// quad_decoder); CTRL.SRC chooses. The block converts them to
//     I = A * sin(phase),   Q = A * cos(phase)
// by looking up sin(phase), cos(phase) and the calibrated amplitude A in
// an external FLASH memory, then multiplying. Results go to two 14-bit
// DACs in offset binary.
// FLASH layout (16-bit words, word address {region, index}):
//   region 0: sin(2*pi*k/2^PW) * 32767, signed, k = 0 .. 2^PW-1
//   region 1: cos(2*pi*k/2^PW) * 32767, signed
//   region 2: calibrated amplitude for amplitude code k, unsigned
// The block loops continuously: latch inputs, three FLASH reads of
// FLASH_WAIT+1 clocks each (flash_rd high with a steady address, data
// taken on the last clock), then one clock to multiply and update the
// DAC words, so the outputs follow the inputs within 2 loops.
// I16 = (A * sin) >> 16 (arithmetic), DAC word = I16[15:2] with its sign
// bit inverted; likewise Q.
// Registers (8-bit):
//   0 CTRL bit0 SRC (0 = VME, 1 = encoders)
//   1,2  VME phase, low then high byte      3,4  VME amplitude code
//   5,6  I DAC word (read-only)             7,8  Q DAC word (read-only)
//   9,10 phase in use (read-only)           11,12 amplitude in use
//   13   completed updates, modulo 256 (read-only)
// Following the paper: both input paths, table look-up of sine, cosine
// and amplitude in FLASH, the multiplications, two 14-bit DACs. This
// design's choices: table sizes and scaling, FLASH timing and layout,
// register layout.
module iq_calc
  import vme_pkg::*;
#(
  parameter int unsigned PW         = 10,  // phase code width
  parameter int unsigned AMPW       = 10,  // amplitude code width
  parameter int unsigned FLASH_WAIT = 2    // extra clocks per FLASH read
) (
  input  logic            clk,
  input  logic            rst_n,
  input  reg_req_t        rq,
  output logic [7:0]      rdata,
  input  logic [PW-1:0]   enc_phase,
  input  logic [AMPW-1:0] enc_amp,
  // external FLASH (read only)
  output logic [PW+1:0]   flash_addr,
  output logic            flash_rd,
  input  logic [15:0]     flash_data,
  // DACs
  output logic [13:0]     dac_i,
  output logic [13:0]     dac_q,
  output logic            update
);

  localparam int unsigned FAW = PW + 2;

  logic [7:0]      ctrl;
  logic [15:0]     vme_phase, vme_amp;
  logic [PW-1:0]   ph_l;
  logic [AMPW-1:0] am_l;
  logic signed [15:0] sin_v, cos_v;
  logic [15:0]     amp_v;
  logic [7:0]      nupd;

  typedef enum logic [2:0] {Q_LATCH, Q_SIN, Q_COS, Q_AMP, Q_MUL} qstate_e;
  qstate_e st;
  logic [$clog2(FLASH_WAIT+1)-1:0] w;

  always_comb begin
    flash_rd   = 1'b0;
    flash_addr = '0;
    unique case (st)
      Q_SIN: begin flash_rd = 1'b1; flash_addr = {2'd0, ph_l}; end
      Q_COS: begin flash_rd = 1'b1; flash_addr = {2'd1, ph_l}; end
      Q_AMP: begin flash_rd = 1'b1; flash_addr = FAW'({2'd2, am_l}); end
      default: ;
    endcase
  end

  logic signed [32:0] pi_full, pq_full;
  logic signed [15:0] i16, q16;
  always_comb begin
    pi_full = $signed({1'b0, amp_v}) * sin_v;
    pq_full = $signed({1'b0, amp_v}) * cos_v;
    i16     = 16'(pi_full >>> 16);
    q16     = 16'(pq_full >>> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= Q_LATCH;
      w      <= '0;
      ph_l   <= '0;
      am_l   <= '0;
      sin_v  <= '0;
      cos_v  <= '0;
      amp_v  <= '0;
      dac_i  <= 14'h2000;
      dac_q  <= 14'h2000;
      update <= 1'b0;
      nupd   <= '0;
    end else begin
      update <= 1'b0;
      unique case (st)
        Q_LATCH: begin
          ph_l <= ctrl[0] ? enc_phase : vme_phase[PW-1:0];
          am_l <= ctrl[0] ? enc_amp   : vme_amp[AMPW-1:0];
          w    <= '0;
          st   <= Q_SIN;
        end
        Q_SIN, Q_COS, Q_AMP:
          if (w == ($bits(w))'(FLASH_WAIT)) begin
            w <= '0;
            unique case (st)
              Q_SIN:   begin sin_v <= flash_data; st <= Q_COS; end
              Q_COS:   begin cos_v <= flash_data; st <= Q_AMP; end
              default: begin amp_v <= flash_data; st <= Q_MUL; end
            endcase
          end else begin
            w <= w + 1'b1;
          end
        Q_MUL: begin
          dac_i  <= {~i16[15], i16[14:2]};
          dac_q  <= {~q16[15], q16[14:2]};
          update <= 1'b1;
          nupd   <= nupd + 1'b1;
          st     <= Q_LATCH;
        end
        default: st <= Q_LATCH;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl      <= '0;
      vme_phase <= '0;
      vme_amp   <= '0;
    end else if (rq.wr) begin
      unique case (rq.addr)
        8'd0: ctrl            <= {7'd0, rq.wdata[0]};
        8'd1: vme_phase[7:0]  <= rq.wdata;
        8'd2: vme_phase[15:8] <= rq.wdata;
        8'd3: vme_amp[7:0]    <= rq.wdata;
        8'd4: vme_amp[15:8]   <= rq.wdata;
        default: ;
      endcase
    end
  end

  logic [15:0] ph16, am16;
  assign ph16 = 16'(ph_l);
  assign am16 = 16'(am_l);

  always_comb begin
    unique case (rq.addr)
      8'd0:  rdata = ctrl;
      8'd1:  rdata = vme_phase[7:0];
      8'd2:  rdata = vme_phase[15:8];
      8'd3:  rdata = vme_amp[7:0];
      8'd4:  rdata = vme_amp[15:8];
      8'd5:  rdata = dac_i[7:0];
      8'd6:  rdata = {2'b00, dac_i[13:8]};
      8'd7:  rdata = dac_q[7:0];
      8'd8:  rdata = {2'b00, dac_q[13:8]};
      8'd9:  rdata = ph16[7:0];
      8'd10: rdata = ph16[15:8];
      8'd11: rdata = am16[7:0];
      8'd12: rdata = am16[15:8];
      8'd13: rdata = nupd;
      default: rdata = 8'h00;
    endcase
  end

endmodule
