// tb_twiddle_rom: checks every entry of the twiddle table on both read
// ports against cos/sin computed here, checks exact values at k = 0, N/8,
// N/4 and 3N/8, and checks the one-cycle read latency.
module tb_twiddle_rom;
  import fftconv_pkg::*;
  localparam int unsigned N = 1024;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [$clog2(N/2)-1:0] a, b;
  tw_t qa, qb;
  int checks = 0, failures = 0;

  twiddle_rom #(.N(N)) dut (.clk, .rd_addr_a(a), .rd_data_a(qa), .rd_addr_b(b), .rd_data_b(qb));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int expect_re(int k); return $rtoi($floor($cos(2.0*PI*k/N) * 65536.0 + 0.5)); endfunction
  function automatic int expect_im(int k); return -$rtoi($floor($sin(2.0*PI*k/N) * 65536.0 + 0.5)); endfunction

  initial begin
    a = '0; b = '0;
    @(negedge clk);
    for (int k = 0; k < N/2; k++) begin
      a = ($clog2(N/2))'(k);
      b = ($clog2(N/2))'(N/2 - 1 - k);
      @(posedge clk); #1;
      // data of this cycle's address is visible right after the edge
      chk(qa.re == TW_W'(expect_re(k)) || qa.re == TW_W'(expect_re(k) - 1) ||
          qa.re == TW_W'(expect_re(k) + 1), $sformatf("re[%0d]=%0d", k, qa.re));
      chk(int'(qa.im) - expect_im(k) <= 1 && expect_im(k) - int'(qa.im) <= 1,
          $sformatf("im[%0d]=%0d exp %0d", k, qa.im, expect_im(k)));
      chk(int'(qb.re) - expect_re(N/2-1-k) <= 1 && expect_re(N/2-1-k) - int'(qb.re) <= 1,
          $sformatf("port b re[%0d]", N/2-1-k));
      @(negedge clk);
    end
    // exact known points
    a = 0; b = ($clog2(N/2))'(N/4); @(posedge clk); #1;
    chk(qa.re == 65536 && qa.im == 0, "W^0 = 1");
    chk(qb.re == 0 && qb.im == -65536, "W^(N/4) = -i");
    @(negedge clk);
    a = ($clog2(N/2))'(N/8); b = ($clog2(N/2))'(3*N/8); @(posedge clk); #1;
    chk(qa.re == 46341 && qa.im == -46341, $sformatf("W^(N/8) = %0d %0d", qa.re, qa.im));
    chk(qb.re == -46341 && qb.im == -46341, "W^(3N/8)");
    // latency: change the address, the output must hold until the next edge
    @(negedge clk); a = 0; #1;
    chk(qa.re == 46341, "registered output holds until the clock edge");
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
