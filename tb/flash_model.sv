// flash_model: behavioural model of the PLL module's FLASH memory holding
// the sine, cosine and amplitude tables, for simulation only.
//
// Tables are computed at start: region 0 holds round(32767 sin(2 pi k/N)),
// region 1 round(32767 cos(2 pi k/N)), region 2 the amplitude calibration
// amp_cal(k) = 60 k + 100 (any monotonic curve serves the test). Read
// data appear ACCESS clocks after the address, like an asynchronous FLASH
// with an access time; undefined while the address settles.
module flash_model #(
  parameter int PW = 10,
  parameter int ACCESS = 2
) (
  input  logic          clk,
  input  logic [PW+1:0] addr,
  input  logic          rd,
  output logic [15:0]   data
);
  localparam int N = 2 ** PW;
  logic [15:0] rom [4 * N];
  initial begin
    for (int k = 0; k < N; k++) begin
      rom[k]         = 16'($rtoi($floor(32767.0 * $sin(2.0 * 3.14159265358979 * k / N) + 0.5)));
      rom[N + k]     = 16'($rtoi($floor(32767.0 * $cos(2.0 * 3.14159265358979 * k / N) + 0.5)));
      rom[2 * N + k] = 16'(60 * k + 100);
      rom[3 * N + k] = 16'h0000;
    end
  end
  logic [PW+1:0] a_d [ACCESS];
  always_ff @(posedge clk) begin
    a_d[0] <= addr;
    for (int i = 1; i < ACCESS; i++) a_d[i] <= a_d[i-1];
  end
  // data valid once the address has been stable for ACCESS clocks
  assign data = (rd && a_d[ACCESS-1] == addr) ? rom[addr] : 16'hBAD0;
endmodule
