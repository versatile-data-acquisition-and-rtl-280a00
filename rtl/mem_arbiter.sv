// mem_arbiter: two-master arbiter onto one memory port.
//
// On the Dual DSP Board it lets the two DSPs share the local port of the
// dual-port memory; on the comparator it shares the SDRAM port between
// the history-buffer writer and VME. Each master holds req (with we, be,
// addr, wdata) until it receives a one-clock ack, with read data in
// rdata on that clock. The arbiter forwards one access at a time to the
// memory port, holding m_req until m_ack, and alternates priority
// (round robin) whenever both masters are waiting, so neither can starve
// the other.
//
// Timing: m_req rises 1 clock after the winning req; the master's ack
// follows m_ack by 1 clock. With a memory answering in one clock, each
// access takes 3 clocks and two busy masters get every other access.
// The paper gives the function (arbitration between the two DSPs); the
// round-robin scheme and handshake are this design's.
module mem_arbiter #(
  parameter int unsigned AW = 16,
  parameter int unsigned DW = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // masters
  input  logic [1:0]            req,
  input  logic [1:0]            we,
  input  logic [1:0][DW/8-1:0]  be,
  input  logic [1:0][AW-1:0]    addr,
  input  logic [1:0][DW-1:0]    wdata,
  output logic [1:0]            ack,
  output logic [DW-1:0]         rdata,
  // memory port
  output logic                  m_req,
  output logic                  m_we,
  output logic [DW/8-1:0]       m_be,
  output logic [AW-1:0]         m_addr,
  output logic [DW-1:0]         m_wdata,
  input  logic                  m_ack,
  input  logic [DW-1:0]         m_rdata
);

  typedef enum logic [1:0] {A_IDLE, A_BUSY, A_ACK} astate_e;
  astate_e st;
  logic    g;        // granted master
  logic    last;     // master served last

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= A_IDLE;
      g     <= 1'b0;
      last  <= 1'b1;
      rdata <= '0;
    end else begin
      unique case (st)
        A_IDLE:
          if (req != 2'b00) begin
            // both waiting: serve the one not served last
            if (req == 2'b11) g <= ~last;
            else              g <= req[1];
            st <= A_BUSY;
          end
        A_BUSY:
          if (m_ack) begin
            rdata <= m_rdata;
            st    <= A_ACK;
          end
        A_ACK: begin
          last <= g;
          st   <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  assign m_req   = (st == A_BUSY);
  assign m_we    = we[g];
  assign m_be    = be[g];
  assign m_addr  = addr[g];
  assign m_wdata = wdata[g];
  assign ack[0]  = (st == A_ACK) && !g;
  assign ack[1]  = (st == A_ACK) &&  g;

  a_one_ack: assert property (@(posedge clk) disable iff (!rst_n) !(ack[0] && ack[1]));

endmodule
