// sdram_model: behavioural model of the SDRAM behind its controller, for
// simulation only. It answers the request/acknowledge word port of the
// board: a request (req with we, be, addr, wdata held until ack) is
// acknowledged after LATENCY..LATENCY+3 clocks, like an SDRAM controller
// that has to open a row; read data come with ack. Unwritten words read
// as 0.
module sdram_model #(
  parameter int AW = 22,
  parameter int LATENCY = 3
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [1:0]    be,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   wdata,
  output logic          ack,
  output logic [15:0]   rdata
);
  logic [15:0] mem [2 ** AW];
  int w = 0, lat = LATENCY;
  int nwrites = 0;
  initial begin
    ack = 1'b0;
    rdata = '0;
    for (int i = 0; i < 2 ** AW; i++) mem[i] = '0;
  end
  always @(posedge clk) begin
    ack <= 1'b0;
    if (req && !ack) begin
      if (w >= lat) begin
        ack   <= 1'b1;
        rdata <= mem[addr];
        if (we) begin
          if (be[1]) mem[addr][15:8] <= wdata[15:8];
          if (be[0]) mem[addr][7:0]  <= wdata[7:0];
          nwrites++;
        end
        w   <= 0;
        lat <= LATENCY + $urandom_range(0, 3);
      end else w <= w + 1;
    end
  end
endmodule
