// mps_link: sends the beam-loss data to the Machine Control Center over a
// fibre-optic serial link.
//
// For every loss sample it transmits a four-byte frame: the sync byte
// 0xA5, the loss high byte, the loss low byte and the status byte. The
// frame is latched when the sample arrives; a sample that arrives while a
// frame is still going out is skipped and counted in `skipped`.
//
// Timing: a frame takes 40 bit times of CLKS_PER_BIT clocks; the first
// start bit goes out 1-2 clocks after sample_valid.
// The paper says only that loss data go to the control centre over
// fibre; the frame is this design's.
module mps_link #(
  parameter int unsigned CLKS_PER_BIT = 40   // 1 Mbit/s at 40 MHz
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample_valid,
  input  logic [15:0] loss,
  input  logic [7:0]  status,
  output logic        fiber_tx,
  output logic [7:0]  skipped
);

  logic [7:0] frame [4];
  logic [2:0] left;
  logic       tx_busy, tx_start;
  logic [7:0] tx_byte;

  serial_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data(tx_byte), .start(tx_start), .busy(tx_busy), .tx(fiber_tx));

  assign tx_start = (left != '0) && !tx_busy;
  assign tx_byte  = frame[2'(3'd4 - left)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left    <= '0;
      skipped <= '0;
      for (int i = 0; i < 4; i++) frame[i] <= '0;
    end else begin
      if (tx_start) left <= left - 1'b1;
      if (sample_valid) begin
        if (left != '0 || tx_busy) begin
          if (skipped != 8'hFF) skipped <= skipped + 1'b1;
        end else begin
          frame[0] <= 8'hA5;
          frame[1] <= loss[15:8];
          frame[2] <= loss[7:0];
          frame[3] <= status;
          left     <= 3'd4;
        end
      end
    end
  end

endmodule
