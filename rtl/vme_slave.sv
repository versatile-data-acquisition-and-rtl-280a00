// vme_slave: VME slave interface for A16 and A24 addressing with D08(EO)
// and D16 data transfers, block transfers and read-modify-write cycles.
//
// The asynchronous VME strobes (AS*, DS0*, DS1*, IACK*) pass through
// two-flop synchronisers. When AS* is seen asserted with IACK* high, the
// address modifier and address are captured and compared against the
// board's base address (jumpers) under A16_MASK or A24_MASK. A selected
// cycle then waits for a data strobe, captures WRITE* and the data bus
// one clock later (so both strobes have settled), and issues one word
// request on the local bus. When the local side acknowledges, DTACK* is
// driven low (with read data on the bus for a read) and held until both
// data strobes are released, as the VME handshake requires. While AS*
// stays low further data strobes are served at the same address (a
// read-modify-write cycle) or, for the A24 block-transfer modifiers, at
// the next word address (a block transfer).
//
// Interface: vme_* are the backplane signals as seen after the bus
// transceivers, active-low as on the bus; d_oe turns the data
// transceivers outward. The local bus is lbus_req_t / lb_ack / lb_rdata.
// Timing: DTACK* falls 4 clocks plus the local latency after the data
// strobe, and is released 2-3 clocks after the strobes rise.
//
// The VME protocol is the bus standard's; the synchroniser/FSM structure,
// the local bus and the base/mask decoding are this design's choices.
// Address pipelining: a master may end the address phase (AS* high) and
// start the next one (AS* low with a new address) while the previous
// data strobe is still waiting for DTACK* to be released. The slave keeps
// a flag when it sees AS* high during the acknowledge; once the strobes
// are released it then decodes the new address instead of serving the
// old one. AS* must be seen high for at least one clock (after the
// synchroniser) for this, which the bus's minimum AS* high time gives at
// the clock rates used here.
module vme_slave
  import vme_pkg::*;
#(
  parameter logic [15:0] A16_MASK = 16'hFF00,  // A16 window 256 bytes
  parameter logic [23:0] A24_MASK = 24'hF00000 // A24 window 1 MB
) (
  input  logic        clk,
  input  logic        rst_n,
  // VME backplane (active-low strobes)
  input  logic        vme_as_n,
  input  logic [1:0]  vme_ds_n,     // [1]=DS1 (even byte), [0]=DS0 (odd byte)
  input  logic        vme_write_n,
  input  logic        vme_iack_n,
  input  logic [5:0]  vme_am,
  input  logic [23:1] vme_addr,
  input  logic [15:0] vme_d_in,
  output logic [15:0] vme_d_out,
  output logic        vme_d_oe,
  output logic        vme_dtack_n,
  // board base address (jumpers)
  input  logic [15:0] base_a16,
  input  logic [23:0] base_a24,
  // local bus
  output lbus_req_t   lb_req,
  input  logic        lb_ack,
  input  logic [15:0] lb_rdata,
  // status: a selected cycle is in progress
  output logic        busy
);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_DS, S_LATCH, S_REQ, S_ACK, S_WAIT_AS_HI} state_e;
  state_e state;

  logic [1:0] as_sync, iack_sync;
  logic [1:0] ds_sync0, ds_sync1;
  logic       as_s, iack_s;
  logic [1:0] ds_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      as_sync   <= '0;
      iack_sync <= '0;
      ds_sync0  <= '0;
      ds_sync1  <= '0;
    end else begin
      as_sync   <= {as_sync[0], ~vme_as_n};
      iack_sync <= {iack_sync[0], ~vme_iack_n};
      ds_sync0  <= ~vme_ds_n;
      ds_sync1  <= ds_sync0;
    end
  end
  assign as_s   = as_sync[1];
  assign iack_s = iack_sync[1];
  assign ds_s   = ds_sync1;

  vme_space_e  space_l;
  logic        blt_l;
  logic [23:1] addr_l;
  logic        we_l;
  logic [1:0]  be_l;
  logic [15:0] wdata_l;
  logic [15:0] rdata_l;
  logic        as_cycled;  // AS* went high during the acknowledge

  vme_space_e  cur_space;
  logic        hit;
  always_comb begin
    cur_space = am_space(vme_am);
    unique case (cur_space)
      SP_A16:  hit = (({vme_addr[15:1], 1'b0} & A16_MASK) == (base_a16 & A16_MASK));
      SP_A24:  hit = (({vme_addr, 1'b0} & A24_MASK) == (base_a24 & A24_MASK));
      default: hit = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      space_l <= SP_NONE;
      blt_l   <= 1'b0;
      addr_l  <= '0;
      we_l    <= 1'b0;
      be_l    <= '0;
      wdata_l <= '0;
      rdata_l <= '0;
      as_cycled <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:
          if (as_s && !iack_s) begin
            // address and AM are stable for the whole AS* low time
            if (hit) begin
              space_l <= cur_space;
              blt_l   <= am_is_blt(vme_am);
              addr_l  <= (cur_space == SP_A16) ? {8'h00, vme_addr[15:1]} : vme_addr;
              state   <= S_WAIT_DS;
            end else begin
              state <= S_WAIT_AS_HI;
            end
          end
        S_WAIT_DS:
          if (!as_s)            state <= S_IDLE;
          else if (ds_s != '0)  state <= S_LATCH;
        S_LATCH: begin
          we_l    <= ~vme_write_n;
          be_l    <= ds_s;
          wdata_l <= vme_d_in;
          state   <= S_REQ;
        end
        S_REQ:
          if (lb_ack) begin
            rdata_l   <= lb_rdata;
            as_cycled <= 1'b0;
            state     <= S_ACK;
          end
        S_ACK: begin
          if (!as_s) as_cycled <= 1'b1;
          if (ds_s == '0) begin
            if (blt_l) addr_l <= addr_l + 23'd1;
            // pipelined address phase: decode the new address
            state <= (as_cycled || !as_s) ? S_IDLE : S_WAIT_DS;
          end
        end
        S_WAIT_AS_HI:
          if (!as_s) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    lb_req       = '0;
    lb_req.valid = (state == S_REQ);
    lb_req.we    = we_l;
    lb_req.space = space_l;
    lb_req.addr  = addr_l;
    lb_req.be    = be_l;
    lb_req.wdata = wdata_l;
  end

  assign vme_dtack_n = !(state == S_ACK);
  assign vme_d_oe    = (state == S_ACK) && !we_l;
  assign vme_d_out   = rdata_l;
  assign busy        = (state != S_IDLE) && (state != S_WAIT_AS_HI);

  // DTACK* may only be asserted while a data strobe is or was just asserted
  // and AS* is held: never in idle.
  a_dtack_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE) |-> vme_dtack_n);
  // the data bus is only driven outward during a read acknowledge
  a_oe_read: assert property (@(posedge clk) disable iff (!rst_n)
    vme_d_oe |-> (!vme_dtack_n && !we_l));

endmodule
