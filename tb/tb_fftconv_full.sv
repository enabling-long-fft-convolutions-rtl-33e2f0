// tb_fftconv_full: the kernel at its default size (CHUNK = 8192 samples,
// 16384-point FFTs), no parameter overrides.
//
// Convolves an 11,192-sample sequence with an 8,192-sample filter: the host
// model splits the sequence into a full chunk and a 3,000-sample chunk,
// makes two kernel calls and overlap-adds the two 16,383/11,191-point
// results. The sum is compared with a direct convolution computed here.
// Sequence samples are nucleotide codes 0..3 mapped to the zero-mean values
// -12288, -4096, 4096, 12288; filter samples are random 16-bit values.
// mul_shift = 16 keeps the spectral products inside 32 bits (checked through
// sat_count). The first call runs with no stream pauses and its cycle count
// is checked; the second runs with output back-pressure.
module tb_fftconv_full;
  import fftconv_pkg::*;
  localparam int CHUNK = 8192;
  localparam int N     = 2 * CHUNK;
  localparam int LOG2N = 14;
  localparam int NX = CHUNK + 3000, NH = CHUNK;
  localparam int SHIFT = 16;
  localparam real TOL_REL = 1.0e-4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, s_valid, s_ready, m_valid, m_ready, m_last;
  logic [13:0] len_x, len_h;
  logic [5:0] mul_shift;
  logic [31:0] sat_count;
  in_t   s_data;
  data_t m_data;
  int checks = 0, failures = 0;

  fftconv_kernel dut (
    .clk, .rst_n, .start, .len_x, .len_h, .mul_shift, .busy, .done, .sat_count,
    .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data, .m_last);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  int xs [NX], hs [NH];
  longint yacc [NX + NH - 1];

  task automatic call(input int x0, input int lx, input bit bp, output int cyc);
    int fi, nout;
    @(negedge clk);
    len_x = 14'(lx); len_h = 14'(NH); mul_shift = 6'(SHIFT); start = 1;
    @(negedge clk); start = 0; cyc = 1; fi = 0; nout = 0;
    while (!done) begin
      s_valid = fi < lx + NH;
      s_data  = IN_W'(fi < lx ? xs[x0 + fi] : (fi < lx + NH ? hs[fi - lx] : 0));
      m_ready = !bp || $urandom_range(3) != 0;
      #1;
      if (s_valid && s_ready) fi++;
      if (m_valid && m_ready) begin
        yacc[x0 + nout] += longint'(m_data);
        nout++;
      end
      @(negedge clk); cyc++;
    end
    s_valid = 0;
    chk(nout == lx + NH - 1, $sformatf("%0d result words, expected %0d", nout, lx + NH - 1));
    chk(sat_count == 0, $sformatf("%0d saturated products", sat_count));
  endtask

  initial begin
    int cyc, f_lat, expect_cyc;
    real peak, err, maxerr;
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0; start = 0; s_valid = 0; s_data = '0; m_ready = 1; len_x = '0; len_h = '0; mul_shift = '0;
    for (int n = 0; n < NX; n++) begin
      xs[n] = $urandom_range(3);
      xs[n] = 8192 * xs[n] - 12288;
    end
    for (int n = 0; n < NH; n++) begin
      hs[n] = $urandom_range(65534);
      hs[n] = hs[n] - 32767;
    end
    for (int n = 0; n < NX + NH - 1; n++) yacc[n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    call(0, CHUNK, 0, cyc);
    f_lat = LOG2N * (N/2 + 4) + 1;
    expect_cyc = 2*(N+2) + 3*(f_lat+1) + (N+6) + (2*CHUNK-1+4) + 1;
    chk(cyc == expect_cyc, $sformatf("call took %0d cycles, expected %0d", cyc, expect_cyc));
    $display("one full chunk pair: %0d cycles", cyc);
    call(CHUNK, NX - CHUNK, 1, cyc);

    peak = 0.0; maxerr = 0.0;
    begin
      real    yref [NX + NH - 1];
      longint acc  [NX + NH - 1];
      for (int n = 0; n < NX + NH - 1; n++) acc[n] = 0;
      for (int k = 0; k < NX; k++) begin
        longint xk;
        xk = longint'(xs[k]);
        for (int m = 0; m < NH; m++) acc[k + m] = acc[k + m] + xk * longint'(hs[m]);
      end
      for (int n = 0; n < NX + NH - 1; n++) begin
        yref[n] = $itor(acc[n]) / $itor(64'd1 << SHIFT);
        if (yref[n] > peak) peak = yref[n];
        if (-yref[n] > peak) peak = -yref[n];
      end
      for (int n = 0; n < NX + NH - 1; n++) begin
        err = $itor(yacc[n]) - yref[n];
        if (err < 0.0) err = -err;
        if (err > maxerr) maxerr = err;
        chk(err <= TOL_REL * peak + 16.0, $sformatf("y[%0d] = %0d, expected %f", n, yacc[n], yref[n]));
      end
    end
    $display("result: peak %f, largest error %f (%e of peak)", peak, maxerr, maxerr / peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
