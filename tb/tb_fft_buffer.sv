// tb_fft_buffer: random dual-port writes (operands of different parity)
// and dual-port reads against a reference array; checks one-cycle read
// latency and that a read of a word written in the same cycle returns the
// old value.
module tb_fft_buffer;
  import fftconv_pkg::*;
  localparam int unsigned N  = 64;
  localparam int unsigned AW = $clog2(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [AW-1:0] ra, rb, wa, wb;
  logic          wea, web;
  cplx_t         qa, qb, da, db;
  cplx_t         model [N];
  int checks = 0, failures = 0;

  fft_buffer #(.N(N)) dut (.clk, .rd_addr_a(ra), .rd_addr_b(rb), .rd_data_a(qa), .rd_data_b(qb),
                           .wr_en_a(wea), .wr_addr_a(wa), .wr_data_a(da),
                           .wr_en_b(web), .wr_addr_b(wb), .wr_data_b(db));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic cplx_t rnd();
    return '{re: $urandom, im: $urandom};
  endfunction

  initial begin
    wea = 0; web = 0; ra = 0; rb = 0; wa = 0; wb = 0; da = '0; db = '0;
    // fill every word through both ports: word 2m through A, 2m+1 through B
    for (int m = 0; m < N/2; m++) begin
      @(negedge clk);
      wea = 1; web = 1; wa = AW'(2*m); wb = AW'(2*m+1);
      da = rnd(); db = rnd();
      model[2*m] = da; model[2*m+1] = db;
    end
    // random butterfly-like writes: pairs that differ in one bit
    for (int t = 0; t < 500; t++) begin
      int i0, bitn;
      @(negedge clk);
      bitn = $urandom_range(AW-1);
      i0 = $urandom_range(N-1) & ~(1 << bitn);
      wa = AW'(i0); wb = AW'(i0 | (1 << bitn));
      da = rnd(); db = rnd();
      wea = $urandom_range(1); web = $urandom_range(1);
      if (wea) model[i0] = da;
      if (web) model[i0 | (1 << bitn)] = db;
    end
    @(negedge clk); wea = 0; web = 0;
    // read pairs through both ports
    for (int t = 0; t < 500; t++) begin
      int i0, bitn;
      bitn = $urandom_range(AW-1);
      i0 = $urandom_range(N-1) & ~(1 << bitn);
      ra = AW'(i0); rb = AW'(i0 | (1 << bitn));
      @(posedge clk); #1;
      chk(qa == model[i0], $sformatf("port A read %0d", i0));
      chk(qb == model[i0 | (1 << bitn)], $sformatf("port B read %0d", i0 | (1 << bitn)));
      @(negedge clk);
    end
    // read-during-write returns the old word; the new one is seen next cycle
    ra = 5; wa = 5; da = rnd(); wea = 1;
    @(posedge clk); #1;
    chk(qa == model[5], "read during write gives old data");
    model[5] = da;
    @(negedge clk); wea = 0;
    @(posedge clk); #1;
    chk(qa == model[5], "write visible on next read");
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
