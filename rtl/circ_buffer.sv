// circ_buffer: beam-loss history buffer of the MPS comparator, kept as a
// circular buffer in an external SDRAM of 8 megabytes (DEPTH_WORDS = 4 M
// words of 16 bits).
//
// For every loss sample (sample_valid) the writer stores a record of four
// words at the write pointer, which advances and wraps at DEPTH_WORDS:
//   word 0  {status[7:0], sequence[7:0]}
//   word 1  instantaneous loss (signed)
//   word 2  integrated loss bits 23..16 (zero-extended)
//   word 3  integrated loss bits 15..0
// The writes go out one at a time on a request/acknowledge memory port
// (to the SDRAM controller, through mem_arbiter). The write pointer is
// readable over VME: once the buffer has wrapped it points at the oldest
// record, the start of the history. With FREEZE set the writer stops at
// the first record taken with shutdown high, so the history leading up
// to a shutdown is kept for reconstruction; REARM resumes it.
// A sample that arrives while the previous record is still being written
// is dropped and counted (OVERFLOW).
// Seven 8-bit registers:
//   0 CTRL   bit0 enable, bit1 FREEZE on shutdown, bit2 REARM (self-clearing)
//   1 STATUS bit0 wrapped, bit1 frozen, bit2 writing (read-only)
//   2..4 PTR write pointer in words, low to high byte (read-only)
//   5 OVERFLOW dropped samples, saturating (read-only)
//   6 PAGE   selects which 512 KB of the SDRAM the VME window shows
// Timing: one record takes 4 memory accesses plus one clock.
// Following the paper: the 8 MB SDRAM circular buffer of beam-loss data
// and the VME-visible pointer to the buffer's start. This design's
// choices: record layout, freeze on shutdown, the paged VME window.
module circ_buffer
  import vme_pkg::*;
#(
  parameter int unsigned AW          = 22,          // word address width
  parameter int unsigned DEPTH_WORDS = 4*1024*1024  // 8 MB of 16-bit words
) (
  input  logic           clk,
  input  logic           rst_n,
  input  reg_req_t       rq,
  output logic [7:0]     rdata,
  input  logic           sample_valid,
  input  logic [15:0]    loss,
  input  logic [23:0]    integ,
  input  logic [7:0]     status_in,
  input  logic           shutdown,
  output logic [3:0]     page,
  // memory write port
  output logic           mem_req,
  output logic [AW-1:0]  mem_addr,
  output logic [15:0]    mem_wdata,
  input  logic           mem_ack
);

  logic [7:0]    ctrl;
  logic [AW-1:0] wptr;
  logic          wrapped, frozen;
  logic [7:0]    ovf, seq;
  logic [1:0]    widx;
  logic          busy;
  logic [15:0]   rec [4];

  logic rearm;
  assign rearm = rq.wr && (rq.addr == 8'd0) && rq.wdata[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl    <= '0;
      page    <= '0;
      wptr    <= '0;
      wrapped <= 1'b0;
      frozen  <= 1'b0;
      ovf     <= '0;
      seq     <= '0;
      widx    <= '0;
      busy    <= 1'b0;
      for (int i = 0; i < 4; i++) rec[i] <= '0;
    end else begin
      if (rq.wr && rq.addr == 8'd0) ctrl <= {6'd0, rq.wdata[1:0]};
      if (rq.wr && rq.addr == 8'd6) page <= rq.wdata[3:0];
      if (rearm) frozen <= 1'b0;

      if (sample_valid && ctrl[0] && !frozen) begin
        if (busy) begin
          if (ovf != 8'hFF) ovf <= ovf + 1'b1;
        end else begin
          rec[0] <= {status_in, seq};
          rec[1] <= loss;
          rec[2] <= {8'h00, integ[23:16]};
          rec[3] <= integ[15:0];
          seq    <= seq + 1'b1;
          widx   <= '0;
          busy   <= 1'b1;
          if (shutdown && ctrl[1]) frozen <= 1'b1;
        end
      end

      if (busy && mem_ack) begin
        if (wptr == AW'(DEPTH_WORDS - 1)) begin
          wptr    <= '0;
          wrapped <= 1'b1;
        end else begin
          wptr <= wptr + 1'b1;
        end
        widx <= widx + 1'b1;
        if (widx == 2'd3) busy <= 1'b0;
      end
    end
  end

  assign mem_req   = busy;
  assign mem_addr  = wptr;
  assign mem_wdata = rec[widx];

  logic [23:0] wptr24;
  assign wptr24 = 24'(wptr);

  always_comb begin
    unique case (rq.addr)
      8'd0: rdata = ctrl;
      8'd1: rdata = {5'd0, busy, frozen, wrapped};
      8'd2: rdata = wptr24[7:0];
      8'd3: rdata = wptr24[15:8];
      8'd4: rdata = wptr24[23:16];
      8'd5: rdata = ovf;
      8'd6: rdata = {4'd0, page};
      default: rdata = 8'h00;
    endcase
  end

endmodule
