// scam_pulse: timing-pulse generator of the System Catch All Module,
// which modulates the three lasers of the injector's polarised source so
// that each experimental hall can receive beam independently.
//
// Seven 8-bit registers, as on the original module:
//   0 CTRL      bits 2..0 enable laser channel 2..0
//   1..3 DELAY  delay of channel 0..2 from the trigger, in ticks
//   4..6 WIDTH  pulse width of channel 0..2, in ticks
// A rising edge of the (asynchronous, synchronised here) trigger input
// restarts a common tick counter; channel n is high while
// DELAY[n] <= count < DELAY[n] + WIDTH[n] and enabled. One tick is
// TICK_DIV clocks. The counter stops at its maximum so a pulse never
// repeats without a new trigger.
//
// Timing: outputs are registered; a pulse with DELAY = d starts
// 3 + d*TICK_DIV clocks after the trigger edge reaches the input pin
// (two synchroniser flops, edge detect, output flop).
// The paper gives the function, the seven 8-bit registers and the three
// lasers; the delay/width scheme and the trigger input are this design's.
module scam_pulse
  import vme_pkg::*;
#(
  parameter int unsigned TICK_DIV = 1,
  parameter int unsigned N_LASER  = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  reg_req_t           rq,
  output logic [7:0]         rdata,
  input  logic               trig_in,
  output logic [N_LASER-1:0] laser_out
);

  logic [7:0] ctrl;
  logic [7:0] delay_r [N_LASER];
  logic [7:0] width_r [N_LASER];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl <= '0;
      for (int i = 0; i < N_LASER; i++) begin
        delay_r[i] <= '0;
        width_r[i] <= '0;
      end
    end else if (rq.wr) begin
      if (rq.addr == 8'd0) ctrl <= rq.wdata;
      for (int i = 0; i < N_LASER; i++) begin
        if (rq.addr == 8'(1 + i))           delay_r[i] <= rq.wdata;
        if (rq.addr == 8'(1 + N_LASER + i)) width_r[i] <= rq.wdata;
      end
    end
  end

  always_comb begin
    rdata = 8'h00;
    if (rq.addr == 8'd0) rdata = ctrl;
    for (int i = 0; i < N_LASER; i++) begin
      if (rq.addr == 8'(1 + i))           rdata = delay_r[i];
      if (rq.addr == 8'(1 + N_LASER + i)) rdata = width_r[i];
    end
  end

  // trigger synchroniser and edge detect
  logic [2:0] trig_sync;
  logic       trig_edge;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trig_sync <= '0;
    else        trig_sync <= {trig_sync[1:0], trig_in};
  end
  assign trig_edge = trig_sync[1] && !trig_sync[2];

  // tick prescaler and common counter
  logic [$clog2(TICK_DIV+1)-1:0] pre;
  logic [8:0]  cnt;
  logic        running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre     <= '0;
      cnt     <= '1;
      running <= 1'b0;
    end else if (trig_edge) begin
      pre     <= '0;
      cnt     <= '0;
      running <= 1'b1;
    end else if (running) begin
      if (pre == ($bits(pre))'(TICK_DIV - 1)) begin
        pre <= '0;
        if (cnt == '1) running <= 1'b0;
        else           cnt <= cnt + 9'd1;
      end else begin
        pre <= pre + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) laser_out <= '0;
    else
      for (int i = 0; i < N_LASER; i++)
        laser_out[i] <= ctrl[i] && running &&
                        (cnt >= {1'b0, delay_r[i]}) &&
                        (cnt <  {1'b0, delay_r[i]} + {1'b0, width_r[i]});
  end

endmodule
