// fftconv_pkg: number formats and small arithmetic helpers shared by the
// chunked FFT-convolution kernel.
//
// All samples are signed fixed-point integers. A complex sample is a packed
// pair of DATA_W-bit parts; a twiddle factor is a pair of TW_W-bit parts
// with TW_FRAC fraction bits (1.0 is 2**TW_FRAC). Host samples enter as
// IN_W-bit signed integers. The number format is this design's choice: the
// source design was written in HLS and reports MFLOPS, so it probably used
// floating point; fixed point keeps the RTL small. With IN_W = 16 and an FFT
// of at most 2**15 points the forward transform cannot overflow DATA_W = 32.
package fftconv_pkg;

  localparam int unsigned DATA_W  = 32;  // width of a real or imaginary part
  localparam int unsigned IN_W    = 16;  // width of a host input sample
  localparam int unsigned TW_W    = 18;  // width of a twiddle part
  localparam int unsigned TW_FRAC = 16;  // fraction bits of a twiddle part

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [IN_W-1:0]   in_t;

  typedef struct packed {
    data_t re;
    data_t im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] re;
    logic signed [TW_W-1:0] im;
  } tw_t;

  // Reverse the low `bits` bits of `v` (the bits above are returned as 0).
  function automatic logic [31:0] bitrev(input logic [31:0] v, input int unsigned bits);
    logic [31:0] r;
    r = '0;
    for (int unsigned i = 0; i < bits; i++) r[bits-1-i] = v[i];
    return r;
  endfunction

  // Even parity of an address: which of the two buffer banks holds it.
  function automatic logic bank_of(input logic [31:0] v);
    return ^v;
  endfunction

endpackage
