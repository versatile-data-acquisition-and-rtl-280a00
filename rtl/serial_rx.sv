// serial_rx: asynchronous serial byte receiver for the fibre-optic links.
//
// Frame: idle high, one start bit (low), eight data bits LSB first, one
// stop bit (high); CLKS_PER_BIT clocks per bit. The line is synchronised
// in two flops. A falling edge starts a frame; the start bit is checked at
// its middle and each further bit is sampled at its middle. At the middle
// of the stop bit `valid` pulses for one clock with the byte in `data`;
// `frame_err` pulses instead if the stop bit is low.
//
// The paper says only that the boards exchange serial messages over
// fibre; the frame format and bit rate are this design's assumption.
module serial_rx #(
  parameter int unsigned CLKS_PER_BIT = 20   // 1 Mbit/s at 20 MHz
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);

  logic [1:0] s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s <= 2'b11;
    else        s <= {s[0], rx};
  end
  logic line;
  assign line = s[1];

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;
  rstate_e st;
  logic [$clog2(CLKS_PER_BIT)-1:0] cnt;
  logic [2:0] bitn;
  logic [7:0] sh;

  localparam int unsigned HALF = CLKS_PER_BIT / 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= R_IDLE;
      cnt       <= '0;
      bitn      <= '0;
      sh        <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (st)
        R_IDLE:
          if (!line) begin
            st  <= R_START;
            cnt <= '0;
          end
        R_START:
          if (cnt == ($bits(cnt))'(HALF - 1)) begin
            cnt <= '0;
            if (!line) begin
              st   <= R_DATA;
              bitn <= '0;
            end else begin
              st <= R_IDLE;  // glitch, not a start bit
            end
          end else cnt <= cnt + 1'b1;
        R_DATA:
          if (cnt == ($bits(cnt))'(CLKS_PER_BIT - 1)) begin
            cnt  <= '0;
            sh   <= {line, sh[7:1]};
            bitn <= bitn + 1'b1;
            if (bitn == 3'd7) st <= R_STOP;
          end else cnt <= cnt + 1'b1;
        R_STOP:
          if (cnt == ($bits(cnt))'(CLKS_PER_BIT - 1)) begin
            cnt <= '0;
            st  <= R_IDLE;
            if (line) begin
              data  <= sh;
              valid <= 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
          end else cnt <= cnt + 1'b1;
        default: st <= R_IDLE;
      endcase
    end
  end

endmodule
