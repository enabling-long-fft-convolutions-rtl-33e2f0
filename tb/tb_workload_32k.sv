// tb_workload_32k: the 32K-by-32K evaluation workload run end to end with
// chunks of 8192, 4096 and 2048 samples.
//
// A 32,768-sample sequence (nucleotide codes 0..3 mapped to -12288, -4096,
// 4096, 12288) is convolved with a 32,768-sample random 16-bit filter. For
// each chunk size a kernel built with that CHUNK (FFT length 2*CHUNK) is
// driven by a host model: 32768/CHUNK chunks of each signal, one call per
// chunk pair (16, 64 and 256 calls), overlap-add of the results. The
// 65,535-sample outputs are compared with a direct convolution computed
// here, scaled by 2**-mul_shift; mul_shift is chosen per chunk size so the
// spectral products fit 32 bits, and sat_count must stay zero. The cycles of
// every call are checked against the kernel's formula, and the total kernel
// cycles per chunk size are printed.
module tb_workload_32k;
  import fftconv_pkg::*;
  localparam int L = 32768;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  int turn = -1;

  int xs [L], hs [L];
  longint ref_acc [2*L-1];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  for (genvar g = 0; g < 3; g++) begin : cfg
    localparam int CHUNK = 8192 >> g;
    localparam int N     = 2 * CHUNK;
    localparam int LOG2N = $clog2(N);
    localparam int SHIFT = 16 - 2 * g;        // products shrink with the chunk
    localparam int CW    = $clog2(CHUNK + 1);

    logic start, busy, done, s_valid, s_ready, m_valid, m_ready, m_last;
    logic [CW-1:0] len_x, len_h;
    logic [5:0] mul_shift;
    logic [31:0] sat_count;
    in_t   s_data;
    data_t m_data;
    longint yacc [2*L-1];

    fftconv_kernel #(.CHUNK(CHUNK)) dut (
      .clk, .rst_n, .start, .len_x, .len_h, .mul_shift, .busy, .done, .sat_count,
      .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data, .m_last);

    initial begin
      int m, cyc, fi, nout, f_lat, expect_cyc;
      longint total;
      real peak, err, maxerr;
      start = 0; s_valid = 0; s_data = '0; m_ready = 1; len_x = '0; len_h = '0; mul_shift = '0;
      wait (turn == g);
      for (int n = 0; n < 2*L-1; n++) yacc[n] = 0;
      m = L / CHUNK;
      f_lat = LOG2N * (N/2 + 4) + 1;
      expect_cyc = 2*(N+2) + 3*(f_lat+1) + (N+6) + (2*CHUNK-1+4) + 1;
      total = 0;
      for (int i = 0; i < m; i++)
        for (int j = 0; j < m; j++) begin
          @(negedge clk);
          len_x = CW'(CHUNK); len_h = CW'(CHUNK); mul_shift = 6'(SHIFT); start = 1;
          @(negedge clk); start = 0; cyc = 1; fi = 0; nout = 0;
          while (!done) begin
            s_valid = fi < 2*CHUNK;
            s_data  = IN_W'(fi < CHUNK ? xs[i*CHUNK + fi] : (fi < 2*CHUNK ? hs[j*CHUNK + fi - CHUNK] : 0));
            #1;
            if (s_valid && s_ready) fi++;
            if (m_valid && m_ready) begin
              yacc[(i + j) * CHUNK + nout] += longint'(m_data);
              nout++;
            end
            @(negedge clk); cyc++;
          end
          s_valid = 0;
          total += cyc;
          chk(nout == 2*CHUNK-1, $sformatf("CHUNK %0d pair (%0d,%0d): %0d words", CHUNK, i, j, nout));
          chk(cyc == expect_cyc, $sformatf("CHUNK %0d: call took %0d cycles, expected %0d", CHUNK, cyc, expect_cyc));
          chk(sat_count == 0, $sformatf("CHUNK %0d: %0d saturated products", CHUNK, sat_count));
        end
      peak = 0.0; maxerr = 0.0;
      for (int n = 0; n < 2*L-1; n++) begin
        real r;
        r = $itor(ref_acc[n]) / $itor(64'd1 << SHIFT);
        if (r > peak) peak = r;
        if (-r > peak) peak = -r;
      end
      for (int n = 0; n < 2*L-1; n++) begin
        err = $itor(yacc[n]) - $itor(ref_acc[n]) / $itor(64'd1 << SHIFT);
        if (err < 0.0) err = -err;
        if (err > maxerr) maxerr = err;
        chk(err <= 1.0e-4 * peak + 16.0, $sformatf("CHUNK %0d: y[%0d] = %0d", CHUNK, n, yacc[n]));
      end
      $display("32K x 32K, chunk %0d: %0d calls, %0d kernel cycles (%f ms at 300 MHz), largest error %e of peak",
               CHUNK, m*m, total, $itor(total) / 300.0e3, maxerr / peak);
      turn = g + 1;
    end
  end

  initial begin
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0;
    for (int n = 0; n < L; n++) begin
      xs[n] = $urandom_range(3);
      xs[n] = 8192 * xs[n] - 12288;
      hs[n] = $urandom_range(65534);
      hs[n] = hs[n] - 32767;
    end
    for (int n = 0; n < 2*L-1; n++) ref_acc[n] = 0;
    for (int k = 0; k < L; k++) begin
      longint xk;
      xk = longint'(xs[k]);
      for (int q = 0; q < L; q++) ref_acc[k + q] = ref_acc[k + q] + xk * longint'(hs[q]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    turn = 0;
    wait (turn == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
