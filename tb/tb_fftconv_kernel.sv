// tb_fftconv_kernel: end-to-end test of the chunked FFT convolution at a
// small chunk size (CHUNK = 8, FFT length 16).
//
// The testbench plays the host: it splits x and h into chunks of CHUNK
// samples, calls the kernel once per chunk pair (sending the x chunk, then
// the h chunk, on the input stream), overlap-adds every returned
// len_x+len_h-1 point result at offset (i+j)*CHUNK, and compares the total
// with a direct convolution computed here. It then checks the cycle count of
// one call with no stream pauses, and drives one call with values large
// enough to saturate the product. Random input pauses and output
// back-pressure are applied; each mechanism (several chunk pairs, zero
// padding of a short chunk, input stall, output back-pressure, product
// saturation) is counted and must occur at least once.
module tb_fftconv_kernel;
  import fftconv_pkg::*;
  localparam int unsigned CHUNK = 8;
  localparam int unsigned N     = 2 * CHUNK;
  localparam int unsigned LOG2N = $clog2(N);
  localparam int NX = 29, NH = 19;                  // sequence and filter lengths
  localparam int SHIFT = 6;                         // keeps |X*H| / 2**SHIFT below 2**31
  localparam real TOL_REL = 1.0e-4;                 // error bound, relative to the peak

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, s_valid, s_ready, m_valid, m_ready, m_last;
  logic [$clog2(CHUNK+1)-1:0] len_x, len_h;
  logic [5:0] mul_shift;
  logic [31:0] sat_count;
  in_t   s_data;
  data_t m_data;
  int checks = 0, failures = 0;

  fftconv_kernel #(.CHUNK(CHUNK)) dut (
    .clk, .rst_n, .start, .len_x, .len_h, .mul_shift, .busy, .done, .sat_count,
    .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data, .m_last);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int n_pairs = 0, n_pad = 0, n_in_stall = 0, n_out_stall = 0, n_sat = 0;
  always_ff @(posedge clk) begin
    if (s_ready && !s_valid && busy)  n_in_stall  <= n_in_stall + 1;
    if (m_valid && !m_ready)          n_out_stall <= n_out_stall + 1;
  end

  int xs [NX], hs [NH];
  longint yacc [NX + NH - 1];

  // one kernel call: returns the result words and the cycle count
  task automatic call(input int xc [$], input int hc [$], input int shift, input bit pauses,
                      output longint res [$], output int cyc, output int sat);
    int feed [$];
    int fi;
    feed = {xc, hc};
    res = {};
    @(negedge clk);
    len_x = ($clog2(CHUNK+1))'(xc.size()); len_h = ($clog2(CHUNK+1))'(hc.size());
    mul_shift = 6'(shift); start = 1;
    if (xc.size() < CHUNK || hc.size() < CHUNK) n_pad++;
    @(negedge clk); start = 0; cyc = 1; fi = 0;
    while (!done) begin
      s_valid = (fi < feed.size()) && (!pauses || $urandom_range(3) != 0);
      s_data  = IN_W'(fi < feed.size() ? feed[fi] : 0);
      m_ready = !pauses || $urandom_range(2) != 0;
      #1;
      if (s_valid && s_ready) fi++;
      if (m_valid && m_ready) begin
        res.push_back(longint'(m_data));
        chk(m_last == (res.size() == xc.size() + hc.size() - 1), "m_last on the final word only");
      end
      @(negedge clk); cyc++;
    end
    s_valid = 0;
    sat = int'(sat_count);
    n_pairs++;
    if (sat > 0) n_sat++;
    chk(fi == feed.size(), $sformatf("kernel took %0d of %0d input samples", fi, feed.size()));
    chk(res.size() == xc.size() + hc.size() - 1,
        $sformatf("%0d result words, expected %0d", res.size(), xc.size() + hc.size() - 1));
  endtask

  initial begin
    int mx, mh, cyc, sat, f_lat, expect_cyc;
    longint res [$];
    int xc [$], hc [$];
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0; start = 0; s_valid = 0; s_data = '0; m_ready = 1; len_x = '0; len_h = '0; mul_shift = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // sequence: nucleotide codes 0..3 scaled to the 16-bit input range
    // (code * 8192); filter: full-range signed values
    for (int n = 0; n < NX; n++) xs[n] = 8192 * $urandom_range(3);
    for (int n = 0; n < NH; n++) hs[n] = int'($urandom_range(65534)) - 32767;
    for (int n = 0; n < NX + NH - 1; n++) yacc[n] = 0;

    // host: chunk, call per pair, overlap-add
    mx = (NX + CHUNK - 1) / CHUNK;
    mh = (NH + CHUNK - 1) / CHUNK;
    for (int i = 0; i < mx; i++)
      for (int j = 0; j < mh; j++) begin
        xc = {}; hc = {};
        for (int n = i*CHUNK; n < NX && n < (i+1)*CHUNK; n++) xc.push_back(xs[n]);
        for (int n = j*CHUNK; n < NH && n < (j+1)*CHUNK; n++) hc.push_back(hs[n]);
        call(xc, hc, SHIFT, 1, res, cyc, sat);
        chk(sat == 0, "no saturation on ordinary data");
        foreach (res[k]) yacc[(i + j) * CHUNK + k] += res[k];
      end
    // reference: direct convolution, scaled by 2**-SHIFT
    begin
      real yref [NX + NH - 1];
      real peak, err, maxerr;
      peak = 0.0; maxerr = 0.0;
      for (int n = 0; n < NX + NH - 1; n++) begin
        longint acc;
        acc = 0;
        for (int k = 0; k < NX; k++) if (n - k >= 0 && n - k < NH) acc += longint'(xs[k]) * longint'(hs[n - k]);
        yref[n] = $itor(acc) / $itor(64'd1 << SHIFT);
        if (yref[n] > peak) peak = yref[n];
        if (-yref[n] > peak) peak = -yref[n];
      end
      for (int n = 0; n < NX + NH - 1; n++) begin
        err = $itor(yacc[n]) - yref[n];
        if (err < 0.0) err = -err;
        if (err > maxerr) maxerr = err;
        chk(err <= TOL_REL * peak + 4.0,
            $sformatf("y[%0d] = %0d, direct convolution gives %f", n, yacc[n], yref[n]));
      end
      $display("overlap-add result: peak %f, largest error %f (%e of peak)", peak, maxerr, maxerr / peak);
    end

    // timing of one call without pauses, full chunks, a larger shift
    xc = {}; hc = {};
    for (int n = 0; n < CHUNK; n++) begin
      xc.push_back(int'($urandom_range(65534)) - 32767);
      hc.push_back(int'($urandom_range(65534)) - 32767);
    end
    call(xc, hc, SHIFT + 2, 0, res, cyc, sat);
    f_lat = LOG2N * (N/2 + 4) + 1;
    expect_cyc = 2*(N+2) + 3*(f_lat+1) + (N+6) + (2*CHUNK-1+4) + 1;
    chk(cyc == expect_cyc, $sformatf("call took %0d cycles, expected %0d", cyc, expect_cyc));
    chk(sat == 0, "no saturation with full-range inputs and the larger shift");
    begin
      real yr [2*CHUNK-1];
      real peak, err;
      peak = 0.0;
      for (int n = 0; n < 2*CHUNK-1; n++) begin
        longint acc;
        acc = 0;
        for (int k = 0; k < CHUNK; k++) if (n - k >= 0 && n - k < CHUNK) acc += longint'(xc[k]) * longint'(hc[n - k]);
        yr[n] = $itor(acc) / $itor(64'd1 << (SHIFT + 2));
        if (yr[n] > peak) peak = yr[n];
        if (-yr[n] > peak) peak = -yr[n];
      end
      for (int n = 0; n < 2*CHUNK-1; n++) begin
        err = $itor(res[n]) - yr[n];
        if (err < 0.0) err = -err;
        chk(err <= TOL_REL * peak + 4.0, $sformatf("single call y[%0d] = %0d, expected %f", n, res[n], yr[n]));
      end
    end

    // full-scale inputs with no shift overflow the product
    xc = {}; hc = {};
    for (int n = 0; n < CHUNK; n++) begin xc.push_back(32767); hc.push_back(-32768 + n); end
    call(xc, hc, 0, 1, res, cyc, sat);
    chk(sat > 0, "full-scale inputs with mul_shift 0 saturate");

    chk(n_pairs > 1,     "several chunk pairs processed");
    chk(n_pad > 0,       "a short chunk was zero-padded");
    chk(n_in_stall > 0,  "input stream stalled");
    chk(n_out_stall > 0, "output back-pressure");
    chk(n_sat > 0,       "product saturation");
    $display("mechanisms: pairs=%0d padded=%0d in_stall=%0d out_stall=%0d saturated=%0d",
             n_pairs, n_pad, n_in_stall, n_out_stall, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
