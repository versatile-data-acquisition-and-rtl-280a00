// sync30_node: serial-message node of the 30 Hz timing board.
//
// The boards sit on a fibre-optic token ring. A message is three bytes,
// address then two data bytes, sent back to back; a gap of more than
// GAP_BITS bit times between bytes ends a partial message. Each node has a
// unique address from on-board jumpers (my_addr). Address 0 is the
// broadcast address that every node decodes. A node accepts a message
// whose address is its own or 0: it stores it in the receive registers,
// pulses sync_pulse (the synchronous timing signal) and, if enabled, pulses
// irq (to the VME interrupter).
// A node in repeater mode (CTRL.MASTER = 0) retransmits every byte it
// receives to the next node of the ring, with one byte of buffering. The
// master node (CTRL.MASTER = 1) originates messages from its transmit
// registers and does not retransmit, so that its messages are removed
// when they come round the ring.
// Twelve 8-bit registers:
//   0 CTRL     bit0 IRQ_EN, bit1 MASTER
//   1 STATUS   bit0 message received, bit1 last was broadcast, bit2 serial
//              error; bits 0 and 2 clear when read; bit3 transmitter busy
//   2 MYADDR   jumper address (read-only)
//   3..5       last accepted message: address, data 0, data 1 (read-only)
//   6..8       message to send: address, data 0, data 1
//   9 TXGO     writing bit0 = 1 sends the message (master only)
//   10 RXCNT   accepted messages, modulo 256 (read-only)
//   11 ERRCNT  framing errors and repeater overruns, saturating (read-only)
// Timing: sync_pulse and irq come 1 clock after the middle of the last
// byte's stop bit; a repeated byte leaves 1-2 clocks after it arrived.
// Following the paper: the ring, jumper addresses, broadcast address 0,
// the interrupt if enabled, message encoding and decoding, twelve 8-bit
// registers. This design's choices: message length, byte framing, the
// register layout and the master/repeater split.
module sync30_node
  import vme_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 20,
  parameter int unsigned GAP_BITS     = 30
) (
  input  logic       clk,
  input  logic       rst_n,
  input  reg_req_t   rq,
  output logic [7:0] rdata,
  input  logic [7:0] my_addr,
  input  logic       ring_rx,
  output logic       ring_tx,
  output logic       sync_pulse,
  output logic       irq
);

  logic [7:0] rx_byte;
  logic       rx_valid, rx_ferr;
  serial_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(ring_rx), .data(rx_byte), .valid(rx_valid), .frame_err(rx_ferr));

  logic [7:0] tx_byte;
  logic       tx_start, tx_busy;
  serial_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data(tx_byte), .start(tx_start), .busy(tx_busy), .tx(ring_tx));

  logic [7:0] ctrl;
  logic       st_rcvd, st_bcast, st_err;
  logic [7:0] m_addr, m_d0, m_d1;
  logic [7:0] t_addr, t_d0, t_d1;
  logic [7:0] rxcnt, errcnt;

  // ---- message assembly ----
  localparam int unsigned GAP_CYC = GAP_BITS * CLKS_PER_BIT;
  logic [$clog2(GAP_CYC+1)-1:0] gap;
  logic [1:0] nbyte;
  logic [7:0] a_addr, a_d0;
  logic       accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap    <= '0;
      nbyte  <= '0;
      a_addr <= '0;
      a_d0   <= '0;
    end else begin
      if (rx_valid) begin
        gap <= '0;
        unique case (nbyte)
          2'd0: begin a_addr <= rx_byte; nbyte <= 2'd1; end
          2'd1: begin a_d0   <= rx_byte; nbyte <= 2'd2; end
          default: nbyte <= 2'd0;  // third byte completes the message
        endcase
      end else if (rx_ferr) begin
        nbyte <= '0;
      end else if (nbyte != '0) begin
        if (gap == ($bits(gap))'(GAP_CYC)) nbyte <= '0;
        else                               gap <= gap + 1'b1;
      end
    end
  end
  assign accept = rx_valid && (nbyte == 2'd2) && ((a_addr == my_addr) || (a_addr == 8'h00));

  // ---- transmit: repeater path and master messages ----
  logic       rep_full;
  logic [7:0] rep_byte;
  logic [1:0] m_left;     // master bytes still to send
  logic       rep_ovr;
  logic       tx_go;
  assign tx_go = rq.wr && (rq.addr == 8'd9) && rq.wdata[0] && ctrl[1] && (m_left == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep_full <= 1'b0;
      rep_byte <= '0;
      m_left   <= '0;
    end else begin
      if (rx_valid && !ctrl[1]) begin
        rep_full <= 1'b1;
        rep_byte <= rx_byte;
      end else if (tx_start) begin
        rep_full <= 1'b0;
      end
      if (tx_go) m_left <= 2'd3;
      else if (tx_start && ctrl[1] && m_left != '0) m_left <= m_left - 1'b1;
    end
  end
  assign rep_ovr = rx_valid && !ctrl[1] && rep_full && !tx_start;

  always_comb begin
    tx_start = 1'b0;
    tx_byte  = rep_byte;
    if (!tx_busy) begin
      if (ctrl[1]) begin
        if (m_left != '0) begin
          tx_start = 1'b1;
          unique case (m_left)
            2'd3:    tx_byte = t_addr;
            2'd2:    tx_byte = t_d0;
            default: tx_byte = t_d1;
          endcase
        end
      end else if (rep_full) begin
        tx_start = 1'b1;
      end
    end
  end

  // ---- registers ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl     <= '0;
      st_rcvd  <= 1'b0;
      st_bcast <= 1'b0;
      st_err   <= 1'b0;
      m_addr   <= '0;
      m_d0     <= '0;
      m_d1     <= '0;
      t_addr   <= '0;
      t_d0     <= '0;
      t_d1     <= '0;
      rxcnt    <= '0;
      errcnt   <= '0;
    end else begin
      if (rq.rd && rq.addr == 8'd1) begin
        st_rcvd <= 1'b0;
        st_err  <= 1'b0;
      end
      if (rq.wr) begin
        unique case (rq.addr)
          8'd0: ctrl   <= {6'd0, rq.wdata[1:0]};
          8'd6: t_addr <= rq.wdata;
          8'd7: t_d0   <= rq.wdata;
          8'd8: t_d1   <= rq.wdata;
          default: ;
        endcase
      end
      if (accept) begin
        m_addr   <= a_addr;
        m_d0     <= a_d0;
        m_d1     <= rx_byte;
        st_rcvd  <= 1'b1;
        st_bcast <= (a_addr == 8'h00);
        rxcnt    <= rxcnt + 1'b1;
      end
      if (rx_ferr || rep_ovr) begin
        st_err <= 1'b1;
        if (errcnt != 8'hFF) errcnt <= errcnt + 1'b1;
      end
    end
  end

  always_comb begin
    unique case (rq.addr)
      8'd0:  rdata = ctrl;
      8'd1:  rdata = {4'd0, tx_busy || (m_left != '0), st_err, st_bcast, st_rcvd};
      8'd2:  rdata = my_addr;
      8'd3:  rdata = m_addr;
      8'd4:  rdata = m_d0;
      8'd5:  rdata = m_d1;
      8'd6:  rdata = t_addr;
      8'd7:  rdata = t_d0;
      8'd8:  rdata = t_d1;
      8'd10: rdata = rxcnt;
      8'd11: rdata = errcnt;
      default: rdata = 8'h00;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_pulse <= 1'b0;
      irq        <= 1'b0;
    end else begin
      sync_pulse <= accept;
      irq        <= accept && ctrl[0];
    end
  end

endmodule
