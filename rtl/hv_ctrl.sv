// hv_ctrl: controller for the injector's 100 kV electron-gun power supply
// and its four high-voltage relays.
//
// The supply is programmed by two 16-bit DACs (voltage set point and
// current limit) and read back through two voltage-to-frequency
// converters (output voltage and output current, see vf_counter).
// The controller:
//   * ramps the voltage DAC towards the set point by RAMP_STEP codes every
//     RAMP_DIV clocks instead of jumping to it;
//   * trips (supply disabled, voltage DAC to zero, HV_ON cleared) when any
//     interlock input goes low or when the current read-back exceeds the
//     over-current limit; a trip is latched until TRIP_RESET is written;
//   * on every turn-off or trip runs a bleed-off timer of BLEED_CYCLES
//     clocks and refuses to turn on again until the timer has expired AND
//     the voltage read-back is below BLED_LEVEL, so the supply cannot be
//     re-energised while charged (avoids arcing);
//   * lets the relays change only while the supply is off and bled.
// Nine 8-bit registers:
//   0 CTRL   bit0 HV_ON, bit1 TRIP_RESET (self-clearing), bits 7..4 relays
//   1 STATUS bit0 supply on, bit1 ramping, bit2 interlock trip,
//            bit3 over-current trip, bit4 bleeding, bit5 ready,
//            bit6 all interlocks good (read-only)
//   2,3 SET  set point, low then high byte
//   4 RAMP   ramp step in DAC codes
//   5 ILIM   over-current limit: trip when current count[15:8] > ILIM;
//            also drives the current-limit DAC as ILIM<<8
//   6,7 VMON voltage read-back count, low then high byte (read-only)
//   8 IMON   current read-back count[15:8] (read-only)
// Timing: interlock trips act 3 clocks after the input falls
// (synchroniser plus state register); read-backs refresh once per
// VF_GATE clocks.
// Following the paper: the ramp, the interlocks, the over-current limit,
// the bleed-off timer with voltage read-back, two DACs, two V/F read-backs,
// four relays, nine 8-bit registers. This design's choices: register
// layout, the linear ramp, the comparison on the high count byte, relay
// changes only while off.
module hv_ctrl
  import vme_pkg::*;
#(
  parameter int unsigned N_ILK        = 8,
  parameter int unsigned RAMP_DIV     = 1000,        // 10 kHz ramp ticks at 10 MHz
  parameter int unsigned BLEED_CYCLES = 50_000_000,  // 5 s at 10 MHz
  parameter int unsigned VF_GATE      = 100_000,     // 10 ms at 10 MHz
  parameter logic [15:0] BLED_LEVEL   = 16'h0100
) (
  input  logic             clk,
  input  logic             rst_n,
  input  reg_req_t         rq,
  output logic [7:0]       rdata,
  input  logic [N_ILK-1:0] ilk_ok,      // interlock chain, 1 = safe
  input  logic             vf_volt,     // V/F converter pulses, voltage
  input  logic             vf_curr,     // V/F converter pulses, current
  output logic [15:0]      dac_volt,
  output logic [15:0]      dac_ilim,
  output logic             supply_en,
  output logic [3:0]       relay
);

  typedef enum logic [1:0] {H_OFF, H_ON, H_BLEED} hstate_e;
  hstate_e st;

  logic [7:0]  ctrl;
  logic [15:0] setpt;
  logic [7:0]  ramp_step;
  logic [7:0]  ilim;
  logic        trip_ilk, trip_oc;
  logic [$clog2(BLEED_CYCLES+1)-1:0] bleed_cnt;
  logic [$clog2(RAMP_DIV+1)-1:0]     ramp_pre;

  // read-back converters
  logic [15:0] vmon, imon;
  logic        vmon_v, imon_v;
  vf_counter #(.GATE_CYCLES(VF_GATE), .W(16)) u_vf_volt (
    .clk, .rst_n, .f_in(vf_volt), .count(vmon), .valid(vmon_v));
  vf_counter #(.GATE_CYCLES(VF_GATE), .W(16)) u_vf_curr (
    .clk, .rst_n, .f_in(vf_curr), .count(imon), .valid(imon_v));

  // interlock synchroniser
  logic [N_ILK-1:0] ilk_s0, ilk_s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // the supply is off in reset; the real interlock state is known two
      // clocks later, so reset does not itself latch a trip
      ilk_s0 <= '1;
      ilk_s1 <= '1;
    end else begin
      ilk_s0 <= ilk_ok;
      ilk_s1 <= ilk_s0;
    end
  end
  logic ilk_good;
  assign ilk_good = &ilk_s1;

  logic oc_now;
  assign oc_now = imon_v && (imon[15:8] > ilim) && (st == H_ON);

  logic bled, ready, trip_any;
  assign bled     = (bleed_cnt == '0) && (vmon < BLED_LEVEL);
  assign trip_any = trip_ilk || trip_oc;
  assign ready    = (st == H_OFF) && bled && !trip_any && ilk_good;

  logic trip_reset;
  assign trip_reset = rq.wr && (rq.addr == 8'd0) && rq.wdata[1];

  // registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl      <= '0;
      setpt     <= '0;
      ramp_step <= 8'd1;
      ilim      <= 8'hFF;
    end else begin
      if (rq.wr) begin
        unique case (rq.addr)
          8'd0: ctrl        <= {rq.wdata[7:4], 2'b00, 1'b0, rq.wdata[0]};
          8'd2: setpt[7:0]  <= rq.wdata;
          8'd3: setpt[15:8] <= rq.wdata;
          8'd4: ramp_step   <= rq.wdata;
          8'd5: ilim        <= rq.wdata;
          default: ;
        endcase
      end
      // a trip (or a lost interlock) withdraws the on request
      if (!ilk_good || oc_now) ctrl[0] <= 1'b0;
    end
  end

  always_comb begin
    unique case (rq.addr)
      8'd0: rdata = ctrl;
      8'd1: rdata = {1'b0, ilk_good, ready, (st == H_BLEED), trip_oc, trip_ilk,
                     (st == H_ON) && (dac_volt != setpt), (st == H_ON)};
      8'd2: rdata = setpt[7:0];
      8'd3: rdata = setpt[15:8];
      8'd4: rdata = ramp_step;
      8'd5: rdata = ilim;
      8'd6: rdata = vmon[7:0];
      8'd7: rdata = vmon[15:8];
      8'd8: rdata = imon[15:8];
      default: rdata = 8'h00;
    endcase
  end

  // supply state machine, ramp, trips and bleed timer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= H_OFF;
      dac_volt  <= '0;
      trip_ilk  <= 1'b0;
      trip_oc   <= 1'b0;
      bleed_cnt <= '0;
      ramp_pre  <= '0;
      relay     <= '0;
    end else begin
      if (!ilk_good) trip_ilk <= 1'b1;
      if (oc_now)    trip_oc  <= 1'b1;
      if (trip_reset && ilk_good) begin
        trip_ilk <= 1'b0;
        trip_oc  <= 1'b0;
      end
      unique case (st)
        H_OFF: begin
          dac_volt <= '0;
          if (bleed_cnt != '0) bleed_cnt <= bleed_cnt - 1'b1;
          if (bled) relay <= ctrl[7:4];
          if (ctrl[0] && ready) begin
            st       <= H_ON;
            ramp_pre <= '0;
          end
        end
        H_ON: begin
          if (!ctrl[0] || !ilk_good || oc_now || trip_any) begin
            st        <= H_BLEED;
            dac_volt  <= '0;
            bleed_cnt <= ($bits(bleed_cnt))'(BLEED_CYCLES);
          end else if (ramp_pre == ($bits(ramp_pre))'(RAMP_DIV - 1)) begin
            ramp_pre <= '0;
            if (dac_volt < setpt)
              dac_volt <= (setpt - dac_volt > {8'h00, ramp_step}) ? dac_volt + {8'h00, ramp_step} : setpt;
            else if (dac_volt > setpt)
              dac_volt <= (dac_volt - setpt > {8'h00, ramp_step}) ? dac_volt - {8'h00, ramp_step} : setpt;
          end else begin
            ramp_pre <= ramp_pre + 1'b1;
          end
        end
        H_BLEED: begin
          dac_volt <= '0;
          if (bleed_cnt != '0) bleed_cnt <= bleed_cnt - 1'b1;
          else                 st <= H_OFF;
        end
        default: st <= H_OFF;
      endcase
    end
  end

  assign supply_en = (st == H_ON);
  assign dac_ilim  = {ilim, 8'h00};

  a_off_when_tripped: assert property (@(posedge clk) disable iff (!rst_n)
    (st == H_OFF && trip_any) |=> !supply_en);

endmodule
