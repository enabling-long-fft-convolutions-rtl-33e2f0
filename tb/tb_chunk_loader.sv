// tb_chunk_loader: streams chunks of several lengths (full, short, one
// sample) with random pauses, records every buffer write and checks that
// word bitrev(n) holds (x[n], 0) for n < len and zero above, that every
// word is written exactly once, that s_ready is only high while samples are
// taken, and that an unpaused load takes N + 1 cycles.
module tb_chunk_loader;
  import fftconv_pkg::*;
  localparam int unsigned CHUNK = 16;
  localparam int unsigned N     = 2 * CHUNK;
  localparam int unsigned AW    = $clog2(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, s_valid, s_ready, wr_en;
  logic [$clog2(CHUNK+1)-1:0] len;
  in_t s_data;
  logic [AW-1:0] wr_addr;
  cplx_t wr_data;
  cplx_t mem [N];
  int    nwr [N];
  int checks = 0, failures = 0;

  chunk_loader #(.CHUNK(CHUNK), .N(N)) dut (.clk, .rst_n, .start, .len, .busy, .done,
                                           .s_valid, .s_ready, .s_data, .wr_en, .wr_addr, .wr_data);

  always_ff @(posedge clk) if (wr_en) begin mem[wr_addr] <= wr_data; nwr[wr_addr] <= nwr[wr_addr] + 1; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int rev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  task automatic run_case(input int l, input bit gaps);
    int xs [CHUNK];
    int sent, cyc;
    for (int n = 0; n < CHUNK; n++) xs[n] = int'($urandom_range(65535)) - 32768;
    for (int a = 0; a < N; a++) begin nwr[a] = 0; mem[a] = '{re: 32'd12345, im: 32'd999}; end
    @(negedge clk);
    len = ($clog2(CHUNK+1))'(l); start = 1;
    s_valid = 0;
    @(negedge clk); start = 0; cyc = 1; sent = 0;
    while (!done) begin
      s_valid = (sent < l) && (!gaps || $urandom_range(2) != 0);
      s_data  = IN_W'(xs[sent < l ? sent : 0]);
      #1;                               // handshake is sampled before the edge
      if (s_valid && s_ready) sent++;
      @(negedge clk); cyc++;
    end
    s_valid = 0;
    chk(sent == l, $sformatf("took %0d samples of %0d", sent, l));
    if (!gaps) chk(cyc == N + 1, $sformatf("len %0d: %0d cycles, expected %0d", l, cyc, N + 1));
    for (int n = 0; n < N; n++) begin
      int a;
      a = rev(n, AW);
      chk(nwr[a] == 1, $sformatf("word %0d written %0d times", a, nwr[a]));
      chk(mem[a].re == ((n < l) ? DATA_W'(xs[n]) : '0) && mem[a].im == '0,
          $sformatf("len %0d: word for sample %0d holds (%0d,%0d)", l, n, mem[a].re, mem[a].im));
    end
  endtask

  // s_ready may only be high while the loader still needs samples
  int taken;
  always_ff @(posedge clk) if (start) taken <= 0; else if (s_valid && s_ready) taken <= taken + 1;

  initial begin
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0; start = 0; s_valid = 0; len = '0; s_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(CHUNK, 0);
    run_case(5, 0);
    run_case(CHUNK, 1);
    run_case(1, 1);
    run_case(11, 1);
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
