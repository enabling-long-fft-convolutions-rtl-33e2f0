// tb_elemwise_mult: fills two spectrum arrays with random complex values,
// runs the multiplier with several shifts and checks every word written
// (address bitrev(k), value round((X[k]*H[k]) / 2**shift) saturated) with
// 64-bit arithmetic done here, the saturation count, and the N + 5 cycle
// latency. The spectra are modelled as arrays that answer reads one cycle
// later, like the buffers.
module tb_elemwise_mult;
  import fftconv_pkg::*;
  localparam int unsigned N  = 64;
  localparam int unsigned AW = $clog2(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, wr_en;
  logic [5:0] shift;
  logic [31:0] sat_count;
  logic [AW-1:0] rd_addr, wr_addr;
  cplx_t xq, hq, wr_data;
  cplx_t xs [N], hs [N], ys [N];
  bit    written [N];
  int checks = 0, failures = 0;

  elemwise_mult #(.N(N)) dut (.clk, .rst_n, .start, .mul_shift(shift), .busy, .done, .sat_count,
                              .rd_addr, .x_data(xq), .h_data(hq), .wr_en, .wr_addr, .wr_data);

  always_ff @(posedge clk) begin
    xq <= xs[rd_addr];
    hq <= hs[rd_addr];
    if (wr_en) begin ys[wr_addr] <= wr_data; written[wr_addr] <= 1'b1; end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int rev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  function automatic longint sat32(longint v, ref int nsat);
    if (v > 64'sd2147483647)  begin nsat++; return 64'sd2147483647; end
    if (v < -64'sd2147483648) begin nsat++; return -64'sd2147483648; end
    return v;
  endfunction

  // round half up of v / 2**s on a 128-bit value
  function automatic longint rshift(logic signed [127:0] v, int s);
    if (s == 0) return longint'(v);
    v = (v + (128'sd1 <<< (s - 1))) >>> s;
    if (v > 128'sd9223372036854775807) return 64'sh7fffffffffffffff;
    if (v < -128'sd9223372036854775807) return 64'sh8000000000000001;
    return longint'(v);
  endfunction

  task automatic run_case(input int amp_bits, input int s);
    int cyc, nsat;
    for (int k = 0; k < N; k++) begin
      xs[k].re = DATA_W'($signed($urandom) >>> (32 - amp_bits));
      xs[k].im = DATA_W'($signed($urandom) >>> (32 - amp_bits));
      hs[k].re = DATA_W'($signed($urandom) >>> (32 - amp_bits));
      hs[k].im = DATA_W'($signed($urandom) >>> (32 - amp_bits));
      written[k] = 0;
    end
    @(negedge clk);
    shift = 6'(s); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == N + 5, $sformatf("latency %0d expected %0d", cyc, N + 5));
    nsat = 0;
    for (int k = 0; k < N; k++) begin
      logic signed [127:0] pr, pi;
      longint er, ei;
      int a;
      pr = 128'(longint'(xs[k].re) * longint'(hs[k].re)) - 128'(longint'(xs[k].im) * longint'(hs[k].im));
      pi = 128'(longint'(xs[k].re) * longint'(hs[k].im)) + 128'(longint'(xs[k].im) * longint'(hs[k].re));
      er = sat32(rshift(pr, s), nsat);
      ei = sat32(rshift(pi, s), nsat);
      a = rev(k, AW);
      chk(written[a] && longint'(ys[a].re) == er && longint'(ys[a].im) == ei,
          $sformatf("k=%0d shift=%0d got (%0d,%0d) expected (%0d,%0d)", k, s, ys[a].re, ys[a].im, er, ei));
    end
    chk(sat_count == 32'(nsat), $sformatf("sat_count %0d expected %0d", sat_count, nsat));
  endtask

  initial begin
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0; start = 0; shift = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(15, 0);     // products fit, no shift
    run_case(24, 16);    // shifted with rounding
    run_case(31, 20);    // some parts saturate
    run_case(20, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
