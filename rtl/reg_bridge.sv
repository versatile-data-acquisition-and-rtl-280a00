// reg_bridge: turns one 16-bit local-bus request into the 8-bit register
// accesses of the application blocks.
//
// The boards keep their control and status in 8-bit registers. A VME D16
// access covers two of them: the even byte (D15..D8, DS1*) is the register
// at even offset 2n, the odd byte (D7..D0, DS0*) the register at 2n+1.
// The bridge performs the enabled byte accesses one per clock, even byte
// first, then acknowledges for one clock with the gathered read data.
// A D08(EO) access touches one register only.
//
// Interface: req_valid/req_* hold steady until ack; reg_req is the
// register-bus request (see vme_pkg), reg_rdata its combinational read
// data. Timing: ack rises 2 clocks after the first edge that samples
// req_valid for one byte, 3 for two.
// The byte-to-register mapping follows VME byte ordering; the rest is
// this design's choice.
module reg_bridge
  import vme_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  logic        req_we,
  input  logic [7:1]  req_addr,
  input  logic [1:0]  req_be,
  input  logic [15:0] req_wdata,
  output logic        ack,
  output logic [15:0] rdata,
  output reg_req_t    reg_req,
  input  logic [7:0]  reg_rdata
);

  typedef enum logic [1:0] {B_IDLE, B_EVEN, B_ODD, B_ACK} bstate_e;
  bstate_e st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= B_IDLE;
      rdata <= '0;
    end else begin
      unique case (st)
        B_IDLE:
          if (req_valid) begin
            rdata <= '0;
            if (req_be[1])      st <= B_EVEN;
            else if (req_be[0]) st <= B_ODD;
            else                st <= B_ACK;
          end
        B_EVEN: begin
          rdata[15:8] <= reg_rdata;
          st <= req_be[0] ? B_ODD : B_ACK;
        end
        B_ODD: begin
          rdata[7:0] <= reg_rdata;
          st <= B_ACK;
        end
        B_ACK: st <= B_IDLE;
        default: st <= B_IDLE;
      endcase
    end
  end

  always_comb begin
    reg_req = '0;
    if (st == B_EVEN) begin
      reg_req.addr  = {req_addr, 1'b0};
      reg_req.wdata = req_wdata[15:8];
      reg_req.wr    = req_we;
      reg_req.rd    = !req_we;
    end else if (st == B_ODD) begin
      reg_req.addr  = {req_addr, 1'b1};
      reg_req.wdata = req_wdata[7:0];
      reg_req.wr    = req_we;
      reg_req.rd    = !req_we;
    end
  end

  assign ack = (st == B_ACK);

endmodule
