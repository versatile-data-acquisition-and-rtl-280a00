// quad_decoder: front-panel optical (quadrature) encoder input.
//
// The encoder's A and B channels are synchronised in two flops; every
// edge of either channel moves the position counter one step, up when A
// leads B and down when B leads A (x4 decoding). The counter wraps at
// 2^W, which suits a phase knob; a position where both channels changed
// at once is ignored and counted in `errors`.
//
// Timing: the count changes 3 clocks after an input edge; edges closer
// than 2 clocks apart may be misread.
// The paper says only that amplitude and phase can come from local
// optical encoders; the decoder is the standard quadrature circuit.
module quad_decoder #(
  parameter int unsigned W = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enc_a,
  input  logic         enc_b,
  output logic [W-1:0] count,
  output logic [7:0]   errors
);

  logic [1:0] sa, sb;
  logic [1:0] prev, cur;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa <= '0;
      sb <= '0;
    end else begin
      sa <= {sa[0], enc_a};
      sb <= {sb[0], enc_b};
    end
  end
  assign cur = {sa[1], sb[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev   <= '0;
      count  <= '0;
      errors <= '0;
    end else begin
      prev <= cur;
      unique case ({prev, cur})
        // A leads B: 00 -> 10 -> 11 -> 01 -> 00
        4'b00_10, 4'b10_11, 4'b11_01, 4'b01_00: count <= count + 1'b1;
        4'b00_01, 4'b01_11, 4'b11_10, 4'b10_00: count <= count - 1'b1;
        4'b00_11, 4'b11_00, 4'b01_10, 4'b10_01:
          if (errors != 8'hFF) errors <= errors + 1'b1;
        default: ;
      endcase
    end
  end

endmodule
