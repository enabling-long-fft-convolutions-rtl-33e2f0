// twiddle_rom: the "Twiddles" table of the kernel's on-chip memory.
//
// Holds W_N^k = exp(-2*pi*i*k/N) = cos(2*pi*k/N) - i*sin(2*pi*k/N) for
// k = 0 .. N/2-1, each part rounded to TW_W bits with TW_FRAC fraction bits
// (1.0 = 2**TW_FRAC). The table is filled at elaboration from $cos/$sin, so
// no data file is needed; synthesis tools turn it into an initialised ROM.
//
// Two independent read ports (the forward FFT and the inverse FFT each have
// one), both registered: the factor for address a presented in cycle t is on
// rd_data in cycle t+1. The paper names the twiddle table and places it in
// BRAM; its size, width and port count are this design's choices.
module twiddle_rom
  import fftconv_pkg::*;
#(
  parameter int unsigned N = 16384           // FFT length (power of two)
) (
  input  logic                     clk,
  input  logic [$clog2(N/2)-1:0]   rd_addr_a,
  output tw_t                      rd_data_a,
  input  logic [$clog2(N/2)-1:0]   rd_addr_b,
  output tw_t                      rd_data_b
);

  localparam real PI = 3.14159265358979323846;

  tw_t rom [N/2];

  initial begin
    for (int k = 0; k < N/2; k++) begin
      rom[k].re = TW_W'($rtoi($floor( $cos(2.0 * PI * k / N) * (2.0 ** TW_FRAC) + 0.5)));
      rom[k].im = TW_W'($rtoi($floor(-$sin(2.0 * PI * k / N) * (2.0 ** TW_FRAC) + 0.5)));
    end
  end

  always_ff @(posedge clk) begin
    rd_data_a <= rom[rd_addr_a];
    rd_data_b <= rom[rd_addr_b];
  end

endmodule
