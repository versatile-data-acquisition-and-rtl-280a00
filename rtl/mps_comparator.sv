// mps_comparator: beam-loss computation of the Machine Protection System
// comparator.
//
// Eight current measurements arrive together (cur, strobed by cur_valid)
// from the Dual DSP Boards over the P2 backplane: channel 0 is the
// injector, channels 1..7 the end stations. For each sample set the block
//   1. compares every channel with its operator limit (LIMIT[n]); a
//      current above its limit trips the beam;
//   2. sums the end-station currents selected by CH_MASK and subtracts the
//      sum from the injector current: the instantaneous loss;
//   3. integrates the loss: INTEG <= INTEG + loss - (INTEG >> LEAK), never
//      below zero, so a steady small loss settles at loss << LEAK while a
//      large one grows quickly; INTEG above INTEG_LIMIT trips the beam.
// A trip latches `shutdown` (beam permit removed) until CTRL.CLEAR is
// written. The loss also drives a 16-bit DAC (offset binary, saturated)
// and is handed on with a one-clock `loss_valid` to the history buffer and
// to the fibre link.
// Registers (8-bit):
//   0x00 CTRL      bit0 trips enabled, bit1 CLEAR (self-clearing)
//   0x01 STATUS    bit0 shutdown, bit1 limit trip, bit2 integrated trip
//   0x02 CH_MASK   bit n includes end station n (bit0 ignored)
//   0x03 LIM_TRIP  channels that exceeded their limit (read-only)
//   0x04 LEAK      integrator leak shift, 0..31
//   0x05..0x07     INTEG_LIMIT, low to high byte
//   0x08,0x09      last loss (signed, saturated to 16 bits), low, high
//   0x0A..0x0C     last integrated loss, low to high byte
//   0x10..0x1F     LIMIT[n] for n = 0..7, low then high byte
// The status port is the STATUS register (bits 7..3 are zero); the
// history buffer stores it with every record.
// Timing: loss_valid and trips 2 clocks after cur_valid.
// Following the paper: the sum of end-station currents compared to the
// injector current, per-location limits, integration of the loss and
// shutdown, the DAC and the hand-off to the buffer and fibre link. The
// paper calls the integration "adaptive" without describing it; the leaky
// integrator is this design's stand-in. Widths and register layout are
// this design's.
module mps_comparator
  import vme_pkg::*;
#(
  parameter int unsigned N_CH = 8,
  parameter int unsigned CW   = 16,   // current word width
  parameter int unsigned IW   = 24    // integrator width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  reg_req_t            rq,
  output logic [7:0]          rdata,
  input  logic [N_CH-1:0][CW-1:0] cur,
  input  logic                cur_valid,
  output logic                loss_valid,
  output logic signed [15:0]  loss,
  output logic [IW-1:0]       integ,
  output logic [7:0]          status,
  output logic                shutdown,
  output logic [15:0]         dac_loss
);

  logic [7:0]      ctrl, ch_mask, lim_trip;
  logic [4:0]      leak;
  logic [IW-1:0]   integ_limit;
  logic [CW-1:0]   limit [N_CH];
  logic            trip_lim, trip_int;

  // ---- stage 1: limits and sum ----
  localparam int unsigned SW = CW + $clog2(N_CH) + 1;
  logic [SW-1:0]   sum_c;
  logic [N_CH-1:0] over_c;
  always_comb begin
    sum_c = '0;
    for (int i = 1; i < N_CH; i++)
      if (ch_mask[i]) sum_c = sum_c + SW'(cur[i]);
    for (int i = 0; i < N_CH; i++)
      over_c[i] = cur[i] > limit[i];
  end

  logic            v1;
  logic [SW-1:0]   sum_r;
  logic [CW-1:0]   inj_r;
  logic [N_CH-1:0] over_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      sum_r  <= '0;
      inj_r  <= '0;
      over_r <= '0;
    end else begin
      v1 <= cur_valid;
      if (cur_valid) begin
        sum_r  <= sum_c;
        inj_r  <= cur[0];
        over_r <= over_c;
      end
    end
  end

  // ---- stage 2: loss and integration ----
  logic signed [SW:0]   loss_full;
  logic signed [15:0]   loss_sat;
  logic signed [IW+1:0] integ_next;
  logic [IW-1:0]        integ_c;
  always_comb begin
    loss_full = $signed({1'b0, SW'(inj_r)}) - $signed({1'b0, sum_r});
    if (loss_full > 32767)       loss_sat = 16'sh7FFF;
    else if (loss_full < -32768) loss_sat = -16'sh8000;
    else                         loss_sat = 16'(loss_full);
    integ_next = $signed({2'b00, integ}) + (IW+2)'(loss_full)
               - $signed({2'b00, integ >> leak});
    if (integ_next < 0)                                  integ_c = '0;
    else if (integ_next > $signed({2'b00, {IW{1'b1}}}))  integ_c = '1;
    else                                                 integ_c = integ_next[IW-1:0];
  end

  logic clear;
  assign clear = rq.wr && (rq.addr == 8'h00) && rq.wdata[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loss_valid <= 1'b0;
      loss       <= '0;
      integ      <= '0;
      lim_trip   <= '0;
      trip_lim   <= 1'b0;
      trip_int   <= 1'b0;
    end else begin
      loss_valid <= v1;
      if (v1) begin
        loss  <= loss_sat;
        integ <= integ_c;
        if (ctrl[0]) begin
          if (over_r != '0) begin
            trip_lim <= 1'b1;
            lim_trip <= lim_trip | 8'(over_r);
          end
          if (integ_c > integ_limit) trip_int <= 1'b1;
        end
      end
      if (clear) begin
        trip_lim <= 1'b0;
        trip_int <= 1'b0;
        lim_trip <= '0;
        integ    <= '0;
      end
    end
  end

  assign shutdown = trip_lim || trip_int;
  assign status   = {5'd0, trip_int, trip_lim, shutdown};
  assign dac_loss = {~loss[15], loss[14:0]};

  // ---- registers ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl        <= '0;
      ch_mask     <= 8'hFE;
      leak        <= 5'd4;
      integ_limit <= '1;
      for (int i = 0; i < N_CH; i++) limit[i] <= '1;
    end else if (rq.wr) begin
      unique case (rq.addr)
        8'h00: ctrl <= {7'd0, rq.wdata[0]};
        8'h02: ch_mask <= rq.wdata;
        8'h04: leak <= rq.wdata[4:0];
        8'h05: integ_limit[7:0]   <= rq.wdata;
        8'h06: integ_limit[15:8]  <= rq.wdata;
        8'h07: integ_limit[23:16] <= rq.wdata;
        default: ;
      endcase
      for (int i = 0; i < N_CH; i++) begin
        if (rq.addr == 8'(8'h10 + 2*i)) limit[i][7:0]  <= rq.wdata;
        if (rq.addr == 8'(8'h11 + 2*i)) limit[i][15:8] <= rq.wdata;
      end
    end
  end

  always_comb begin
    unique case (rq.addr)
      8'h00: rdata = ctrl;
      8'h01: rdata = status;
      8'h02: rdata = ch_mask;
      8'h03: rdata = lim_trip;
      8'h04: rdata = {3'd0, leak};
      8'h05: rdata = integ_limit[7:0];
      8'h06: rdata = integ_limit[15:8];
      8'h07: rdata = integ_limit[23:16];
      8'h08: rdata = loss[7:0];
      8'h09: rdata = loss[15:8];
      8'h0A: rdata = integ[7:0];
      8'h0B: rdata = integ[15:8];
      8'h0C: rdata = integ[23:16];
      default: rdata = 8'h00;
    endcase
    for (int i = 0; i < N_CH; i++) begin
      if (rq.addr == 8'(8'h10 + 2*i)) rdata = limit[i][7:0];
      if (rq.addr == 8'(8'h11 + 2*i)) rdata = limit[i][15:8];
    end
  end

endmodule
