// serial_tx: asynchronous serial byte transmitter for the fibre-optic
// links.
//
// Frame: one start bit (low), eight data bits LSB first, one stop bit
// (high), CLKS_PER_BIT clocks per bit; the line idles high. A byte is
// accepted on a clock where `start` is high and `busy` is low; `busy`
// stays high for the 10 bit times of the frame.
//
// The frame format and bit rate are this design's assumption (the paper
// names only serial messages over fibre).
module serial_tx #(
  parameter int unsigned CLKS_PER_BIT = 20
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       start,
  output logic       busy,
  output logic       tx
);

  logic [$clog2(CLKS_PER_BIT)-1:0] cnt;
  logic [3:0] bitn;
  logic [9:0] sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      bitn <= '0;
      sh   <= '1;
      tx   <= 1'b1;
    end else if (!busy) begin
      tx <= 1'b1;
      if (start) begin
        busy <= 1'b1;
        sh   <= {1'b1, data, 1'b0};
        cnt  <= '0;
        bitn <= '0;
        tx   <= 1'b0;
      end
    end else begin
      if (cnt == ($bits(cnt))'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          tx   <= 1'b1;
        end else begin
          bitn <= bitn + 1'b1;
          tx   <= sh[bitn + 4'd1];
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
