// vf_counter: read-back of a voltage-to-frequency converter.
//
// The converter's pulse train (asynchronous) is synchronised, its rising
// edges are counted over a gate of GATE_CYCLES clocks, and at the end of
// each gate the count is latched into `count` (saturating at all ones)
// and `valid` pulses for one clock. The count is proportional to the
// converter's input voltage.
//
// Timing: a new count every GATE_CYCLES clocks. Input pulses must be at
// least one clock high and one clock low.
// The paper names the voltage-to-frequency converters used for read-back;
// the gated counter is the simplest circuit that reads them.
module vf_counter #(
  parameter int unsigned GATE_CYCLES = 100_000,  // 10 ms at 10 MHz
  parameter int unsigned W           = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         f_in,
  output logic [W-1:0] count,
  output logic         valid
);

  logic [2:0] s;
  logic       edge_det;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s <= '0;
    else        s <= {s[1:0], f_in};
  end
  assign edge_det = s[1] && !s[2];

  logic [$clog2(GATE_CYCLES)-1:0] gate;
  logic [W-1:0]                   acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gate  <= '0;
      acc   <= '0;
      count <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (gate == ($bits(gate))'(GATE_CYCLES - 1)) begin
        gate  <= '0;
        count <= (edge_det && acc != '1) ? acc + 1'b1 : acc;
        valid <= 1'b1;
        acc   <= '0;
      end else begin
        gate <= gate + 1'b1;
        if (edge_det && acc != '1) acc <= acc + 1'b1;
      end
    end
  end

endmodule
