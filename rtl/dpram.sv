// dpram: dual-port memory of the Dual DSP Board, 128 kilobytes as
// 64 K words of 16 bits.
//
// Two independent synchronous ports, A (VME) and B (the DSPs, through
// mem_arbiter). Each port has an enable, per-byte write enables
// (we[1] = D15..D8, we[0] = D7..D0), a word address and registered read
// data; `ack` rises one clock after an enabled access, when rdata is
// valid. A write on one port is seen by the other on later reads;
// simultaneous writes to the same byte resolve as port B.
//
// The size follows the paper; the organisation as 16-bit words with byte
// enables matches the 16-bit VME interface and is this design's choice.
module dpram #(
  parameter int unsigned AW = 16,   // 64 K words = 128 KB
  parameter int unsigned DW = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                a_en,
  input  logic [DW/8-1:0]     a_we,
  input  logic [AW-1:0]       a_addr,
  input  logic [DW-1:0]       a_wdata,
  output logic [DW-1:0]       a_rdata,
  output logic                a_ack,
  input  logic                b_en,
  input  logic [DW/8-1:0]     b_we,
  input  logic [AW-1:0]       b_addr,
  input  logic [DW-1:0]       b_wdata,
  output logic [DW-1:0]       b_rdata,
  output logic                b_ack
);

  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int i = 0; i < DW/8; i++)
        if (a_we[i]) mem[a_addr][i*8 +: 8] <= a_wdata[i*8 +: 8];
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      for (int i = 0; i < DW/8; i++)
        if (b_we[i]) mem[b_addr][i*8 +: 8] <= b_wdata[i*8 +: 8];
      b_rdata <= mem[b_addr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_ack <= 1'b0;
      b_ack <= 1'b0;
    end else begin
      a_ack <= a_en;
      b_ack <= b_en;
    end
  end

endmodule
