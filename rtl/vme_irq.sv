// vme_irq: VME vectored interrupter with D08(O) and D16 status/ID and the
// IACK daisy chain.
//
// Each interrupt source sets a pending bit on a one-clock pulse of
// src_pulse. While any enabled source is pending, the interrupter pulls
// the request line IRQ<level>* low (irq_n, one bit per level 1..7). The
// interrupt handler answers with an IACK cycle: IACK* and AS* low with
// the acknowledged level on A3..A1, the IACKIN* daisy-chain input low.
// If that level is ours and a source is pending, the interrupter drives
// its status/ID on the data bus (all 16 bits when both data strobes are
// low, D16; the low byte when only DS0* is low, D08(O)) and asserts
// DTACK* until the strobes are released. The vector is vector_base with
// its low three bits replaced by the number of the lowest pending
// source, and that source's pending bit is cleared on the acknowledge
// (release on acknowledge). An IACK cycle that is not ours is passed down
// the chain on IACKOUT* until AS* rises.
//
// Timing: strobes are synchronised in two flops; DTACK* is asserted
// 3-4 clocks after the data strobe. The VME protocol is the standard's;
// source numbering in the vector is this design's choice.
module vme_irq #(
  parameter int unsigned N_SRC = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_SRC-1:0] src_pulse,
  input  logic [N_SRC-1:0] src_enable,
  input  logic [2:0]       level,        // 1..7, 0 disables
  input  logic [15:0]      vector_base,
  output logic [N_SRC-1:0] pending,
  // VME
  input  logic             vme_as_n,
  input  logic [1:0]       vme_ds_n,
  input  logic             vme_iack_n,
  input  logic             vme_iackin_n,
  input  logic [3:1]       vme_addr,
  output logic             vme_iackout_n,
  output logic [7:1]       vme_irq_n,
  output logic [15:0]      vme_d_out,
  output logic             vme_d_oe,
  output logic             vme_dtack_n
);

  logic [1:0] as_sync, iack_sync, iackin_sync;
  logic [1:0] ds_sync0, ds_sync1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      as_sync     <= '0;
      iack_sync   <= '0;
      iackin_sync <= '0;
      ds_sync0    <= '0;
      ds_sync1    <= '0;
    end else begin
      as_sync     <= {as_sync[0], ~vme_as_n};
      iack_sync   <= {iack_sync[0], ~vme_iack_n};
      iackin_sync <= {iackin_sync[0], ~vme_iackin_n};
      ds_sync0    <= ~vme_ds_n;
      ds_sync1    <= ds_sync0;
    end
  end

  logic             as_s, iack_s, iackin_s;
  logic [1:0]       ds_s;
  assign as_s     = as_sync[1];
  assign iack_s   = iack_sync[1];
  assign iackin_s = iackin_sync[1];
  assign ds_s     = ds_sync1;

  logic [N_SRC-1:0] active;
  logic             any_active;
  logic [2:0]       src_idx;
  assign active     = pending & src_enable;
  assign any_active = (active != '0) && (level != 3'd0);

  always_comb begin
    src_idx = '0;
    for (int i = N_SRC - 1; i >= 0; i--)
      if (active[i]) src_idx = 3'(i);
  end

  typedef enum logic [2:0] {I_IDLE, I_DECIDE, I_WAIT_DS, I_ACK, I_PASS, I_WAIT_AS_HI} istate_e;
  istate_e     st;
  logic [15:0] vec_l;
  logic [2:0]  idx_l;
  logic [N_SRC-1:0] clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= I_IDLE;
      vec_l <= '0;
      idx_l <= '0;
    end else begin
      unique case (st)
        I_IDLE:
          if (as_s && iack_s && iackin_s) st <= I_DECIDE;
        I_DECIDE:
          if (any_active && (vme_addr == level)) begin
            vec_l <= {vector_base[15:3], src_idx};
            idx_l <= src_idx;
            st    <= I_WAIT_DS;
          end else begin
            st <= I_PASS;
          end
        I_WAIT_DS:
          if (!as_s)            st <= I_IDLE;
          else if (ds_s != '0)  st <= I_ACK;
        I_ACK:
          if (ds_s == '0) st <= I_WAIT_AS_HI;
        I_PASS:
          if (!as_s) st <= I_IDLE;
        I_WAIT_AS_HI:
          if (!as_s) st <= I_IDLE;
        default: st <= I_IDLE;
      endcase
    end
  end

  // release on acknowledge: clear the served source when DTACK* is given
  always_comb begin
    clr = '0;
    for (int i = 0; i < N_SRC; i++)
      if (st == I_ACK && ds_s == '0 && idx_l == 3'(i)) clr[i] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pending <= '0;
    else        pending <= (pending & ~clr) | src_pulse;
  end

  always_comb begin
    vme_irq_n = '1;
    if (any_active) vme_irq_n[level] = 1'b0;
  end

  assign vme_iackout_n = !(st == I_PASS);
  assign vme_dtack_n   = !(st == I_ACK);
  assign vme_d_oe      = (st == I_ACK);
  // D08(O): only DS0* low, vector byte on D7..D0 (upper byte driven with the
  // same value is harmless); D16: all sixteen bits.
  assign vme_d_out     = (ds_s == 2'b01) ? {8'h00, vec_l[7:0]} : vec_l;

  a_no_ack_and_pass: assert property (@(posedge clk) disable iff (!rst_n)
    !(!vme_dtack_n && !vme_iackout_n));

endmodule
