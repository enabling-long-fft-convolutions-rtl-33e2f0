// tb_fft_radix2: checks fft_radix2 with INVERSE = 0, together with fft_buffer and
// twiddle_rom, as the forward FFT: the buffer is loaded with random complex data in bit-reversed order, the result is compared with a DFT computed here in real arithmetic (within a few LSBs).
// Also checks the cycle count log2(N)*(N/2+4)+1 from start to done, at two
// sizes, and that busy is high throughout.
module tb_fft_radix2;
  import fftconv_pkg::*;
  localparam bit INV = 1'b0;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  int phase = -1;                 // which size is running

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  function automatic int rev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // one engine + buffer + ROM per size
  for (genvar g = 0; g < 2; g++) begin : sz
    localparam int unsigned N  = (g == 0) ? 16 : 256;
    localparam int unsigned AW = $clog2(N);
    logic start, busy, done;
    logic [AW-1:0] e_ra, e_rb, e_wa, e_wb, t_wa;
    logic e_wea, e_web, t_we;
    cplx_t qa, qb, e_da, e_db, t_da;
    logic [AW-2:0] twa;
    tw_t twd, unused_q;
    logic use_tb;

    fft_radix2 #(.N(N), .INVERSE(INV)) dut (
      .clk, .rst_n, .start, .busy, .done,
      .rd_addr_a(e_ra), .rd_addr_b(e_rb), .rd_data_a(qa), .rd_data_b(qb),
      .wr_en_a(e_wea), .wr_addr_a(e_wa), .wr_data_a(e_da),
      .wr_en_b(e_web), .wr_addr_b(e_wb), .wr_data_b(e_db),
      .tw_addr(twa), .tw_data(twd));
    twiddle_rom #(.N(N)) rom (.clk, .rd_addr_a(twa), .rd_data_a(twd),
                              .rd_addr_b('0), .rd_data_b(unused_q));
    fft_buffer #(.N(N)) buff (
      .clk, .rd_addr_a(use_tb ? t_wa : e_ra), .rd_addr_b(e_rb), .rd_data_a(qa), .rd_data_b(qb),
      .wr_en_a(use_tb ? t_we : e_wea), .wr_addr_a(use_tb ? t_wa : e_wa),
      .wr_data_a(use_tb ? t_da : e_da),
      .wr_en_b(use_tb ? 1'b0 : e_web), .wr_addr_b(e_wb), .wr_data_b(e_db));

    task automatic run_case(input int amp);
      real xr [N], xi [N];
      int cyc;
      bit busy_ok;
      // load
      use_tb = 1; start = 0;
      for (int n = 0; n < N; n++) begin
        xr[n] = $itor($urandom_range(2*amp)) - $itor(amp);
        xi[n] = $itor($urandom_range(2*amp)) - $itor(amp);
      end
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        t_we = 1; t_wa = AW'(rev(n, AW));
        t_da.re = DATA_W'($rtoi(xr[n])); t_da.im = DATA_W'($rtoi(xi[n]));
      end
      @(negedge clk); t_we = 0; use_tb = 0;
      // run
      start = 1; cyc = 0; busy_ok = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin
        busy_ok &= busy;
        @(negedge clk); cyc++;
      end
      chk(cyc == AW * (N/2 + 4) + 1, $sformatf("N=%0d cycles %0d expected %0d", N, cyc, AW*(N/2+4)+1));
      chk(busy_ok, "busy during the transform");
      // read back and compare with the DFT
      use_tb = 1;
      for (int k = 0; k < N; k++) begin
        real er, ei, sgn, tol;
        er = 0.0; ei = 0.0;
        sgn = INV ? 1.0 : -1.0;
        for (int n = 0; n < N; n++) begin
          real ang;
          ang = sgn * 2.0 * PI * $itor((n * k) % N) / $itor(N);
          er += xr[n] * $cos(ang) - xi[n] * $sin(ang);
          ei += xr[n] * $sin(ang) + xi[n] * $cos(ang);
        end
        if (INV) begin er = er / N; ei = ei / N; end
        tol = INV ? 2.0 * AW : 2.0 + 0.5 * $sqrt($itor(N * AW));  // twiddle rounding grows with the unscaled forward transform
        t_wa = AW'(k);
        @(posedge clk); #1;
        chk(absr($itor(qa.re) - er) <= tol && absr($itor(qa.im) - ei) <= tol,
            $sformatf("N=%0d bin %0d got (%0d, %0d) expected (%f, %f)", N, k, qa.re, qa.im, er, ei));
        @(negedge clk);
      end
      use_tb = 0;
    endtask

    initial begin
      start = 0; use_tb = 1; t_we = 0;
      wait (phase == g);
      run_case(g == 0 ? 1000 : 20000);
      run_case(g == 0 ? 30000 : 7);
      phase = g + 1;
    end
  end

  initial begin
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    phase = 0;
    wait (phase == 2);
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
