// tb_store_result: fills a buffer model with random words, runs the store
// for several lengths with and without random back-pressure, and checks the
// streamed words (real parts, in order), m_last on the final word only, no
// word while done, and the len + 3 cycle latency with m_ready held high.
module tb_store_result;
  import fftconv_pkg::*;
  localparam int unsigned N  = 32;
  localparam int unsigned AW = $clog2(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, m_valid, m_ready, m_last;
  logic [$clog2(N+1)-1:0] len;
  logic [AW-1:0] rd_addr;
  cplx_t rd_data;
  data_t m_data;
  cplx_t mem [N];
  int checks = 0, failures = 0;

  store_result #(.N(N)) dut (.clk, .rst_n, .start, .len, .busy, .done, .rd_addr, .rd_data,
                             .m_valid, .m_ready, .m_data, .m_last);

  always_ff @(posedge clk) rd_data <= mem[rd_addr];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run_case(input int l, input bit bp);
    int got, cyc;
    for (int a = 0; a < N; a++) mem[a] = '{re: $urandom, im: $urandom};
    @(negedge clk);
    len = ($clog2(N+1))'(l); start = 1; m_ready = 0;
    @(negedge clk); start = 0; cyc = 1; got = 0;
    while (!done) begin
      m_ready = !bp || ($urandom_range(2) == 0);
      #1;                               // handshake is sampled before the edge
      if (m_valid && m_ready) begin
        chk(got < l && m_data == mem[got].re, $sformatf("word %0d: %0d expected %0d", got, m_data, mem[got].re));
        chk(m_last == (got == l - 1), $sformatf("m_last at word %0d", got));
        got++;
      end
      @(negedge clk); cyc++;
    end
    chk(got == l, $sformatf("%0d words of %0d", got, l));
    if (!bp) chk(cyc == l + 3, $sformatf("len %0d: %0d cycles, expected %0d", l, cyc, l + 3));
    m_ready = 1;
    repeat (3) begin @(negedge clk); chk(!m_valid, "no word after done"); end
  endtask

  initial begin
    // a real falling edge of rst_n resets the flops before the first clock
    rst_n = 1; #1 rst_n = 0; start = 0; m_ready = 0; len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(N - 1, 0);
    run_case(1, 0);
    run_case(N - 1, 1);
    run_case(N, 1);
    run_case(7, 1);
    run_case(N, 0);
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
