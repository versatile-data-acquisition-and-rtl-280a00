// adc_scan: read-back of the PLL module's eight-channel ADC.
//
// The block scans the channels in turn without software help: it selects
// channel n on the ADC's input multiplexer (adc_ch), waits SETTLE clocks,
// pulses adc_convst for one clock, waits for adc_busy to rise and fall,
// then takes adc_data into result register n and moves to the next
// channel. If busy never rises within TIMEOUT clocks the channel is
// skipped and counted in the error register. A VME read of a channel's
// high byte also latches its low byte, and the low byte
// reads back that latched value, so the two halves of a reading always
// belong together. High byte first matches VME byte order: one D16 read
// of word n returns the whole reading.
// Registers (8-bit): 2n = channel n high byte {4'b0, data[11:8]} (latches
// the low byte), 2n+1 = channel n low byte; 16 = completed scans modulo
// 256; 17 = timeout count.
// Timing: one channel takes SETTLE + conversion + 3 clocks.
// The paper gives an eight-channel ADC for read-back voltages; the
// parallel ADC handshake (channel select, convert start, busy, 12-bit
// data) and the continuous scan are this design's choices.
module adc_scan
  import vme_pkg::*;
#(
  parameter int unsigned N_CH    = 8,
  parameter int unsigned DW      = 12,
  parameter int unsigned SETTLE  = 8,
  parameter int unsigned TIMEOUT = 255
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  reg_req_t                rq,
  output logic [7:0]              rdata,
  output logic [$clog2(N_CH)-1:0] adc_ch,
  output logic                    adc_convst,
  input  logic                    adc_busy,
  input  logic [DW-1:0]           adc_data,
  output logic                    scan_done
);

  typedef enum logic [2:0] {C_SETTLE, C_START, C_WAIT_HI, C_WAIT_LO, C_TAKE} cstate_e;
  cstate_e st;
  logic [$clog2(TIMEOUT+SETTLE+1)-1:0] t;
  logic [DW-1:0] res [N_CH];
  logic [7:0]    nscan, nerr;
  logic [7:0]    lo_latch;
  logic [1:0]    bsync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bsync <= '0;
    else        bsync <= {bsync[0], adc_busy};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_SETTLE;
      t          <= '0;
      adc_ch     <= '0;
      adc_convst <= 1'b0;
      nscan      <= '0;
      nerr       <= '0;
      scan_done  <= 1'b0;
      for (int i = 0; i < N_CH; i++) res[i] <= '0;
    end else begin
      adc_convst <= 1'b0;
      scan_done  <= 1'b0;
      unique case (st)
        C_SETTLE:
          if (t == ($bits(t))'(SETTLE)) begin
            t          <= '0;
            adc_convst <= 1'b1;
            st         <= C_START;
          end else t <= t + 1'b1;
        C_START: st <= C_WAIT_HI;
        C_WAIT_HI:
          if (bsync[1]) begin
            t  <= '0;
            st <= C_WAIT_LO;
          end else if (t == ($bits(t))'(TIMEOUT)) begin
            t  <= '0;
            if (nerr != 8'hFF) nerr <= nerr + 1'b1;
            st <= C_TAKE;
          end else t <= t + 1'b1;
        C_WAIT_LO:
          if (!bsync[1]) begin
            res[adc_ch] <= adc_data;
            st          <= C_TAKE;
          end
        C_TAKE: begin
          t <= '0;
          if (adc_ch == ($bits(adc_ch))'(N_CH - 1)) begin
            adc_ch    <= '0;
            nscan     <= nscan + 1'b1;
            scan_done <= 1'b1;
          end else begin
            adc_ch <= adc_ch + 1'b1;
          end
          st <= C_SETTLE;
        end
        default: st <= C_SETTLE;
      endcase
    end
  end

  // register reads; the high-byte read latches the low byte
  logic [15:0] sel_word;
  always_comb begin
    sel_word = '0;
    for (int i = 0; i < N_CH; i++)
      if (rq.addr[7:1] == 7'(i)) sel_word = 16'(res[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lo_latch <= '0;
    else if (rq.rd && !rq.addr[0] && rq.addr < 8'(2*N_CH)) lo_latch <= sel_word[7:0];
  end

  always_comb begin
    rdata = 8'h00;
    if (rq.addr < 8'(2*N_CH)) rdata = rq.addr[0] ? lo_latch : sel_word[15:8];
    else if (rq.addr == 8'(2*N_CH))     rdata = nscan;
    else if (rq.addr == 8'(2*N_CH + 1)) rdata = nerr;
  end

endmodule
