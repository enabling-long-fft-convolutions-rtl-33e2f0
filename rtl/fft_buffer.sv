// fft_buffer: one complex sample buffer of the kernel's on-chip memory.
//
// N complex words, stored in two banks of N/2 words. Word i lives in bank
// parity(i) at bank address i >> 1. The two operands of a radix-2 butterfly
// differ in exactly one address bit, so they always sit in different banks;
// each bank therefore needs only one read and one write port per cycle,
// which is what a simple dual-port block RAM offers.
//
// Interface: two logical read ports (A, B) and two logical write ports
// (A, B), each taking a full word address. Reads are registered: data for
// an address given in cycle t appears in cycle t+1. A read and a write of
// the same word in the same cycle return the old word. Port B may only be
// used together with port A when the two addresses have different parity
// (checked by assertions); a user of a single port uses port A only.
// The banking scheme is this design's own; the paper only says the buffers
// are held in BRAM.
module fft_buffer
  import fftconv_pkg::*;
#(
  parameter int unsigned N = 16384           // words (power of two)
) (
  input  logic                   clk,
  input  logic [$clog2(N)-1:0]   rd_addr_a,
  input  logic [$clog2(N)-1:0]   rd_addr_b,
  output cplx_t                  rd_data_a,
  output cplx_t                  rd_data_b,
  input  logic                   wr_en_a,
  input  logic [$clog2(N)-1:0]   wr_addr_a,
  input  cplx_t                  wr_data_a,
  input  logic                   wr_en_b,
  input  logic [$clog2(N)-1:0]   wr_addr_b,
  input  cplx_t                  wr_data_b
);

  localparam int unsigned AW = $clog2(N);

  cplx_t bank0 [N/2];
  cplx_t bank1 [N/2];

  logic pa_rd, pa_wr, pb_wr;     // bank of port A read / A write / B write
  logic pa_rd_q;
  logic [AW-2:0] b0_raddr, b1_raddr, b0_waddr, b1_waddr;
  logic          b0_we, b1_we;
  cplx_t         b0_wdata, b1_wdata, b0_q, b1_q;

  assign pa_rd = bank_of(32'(rd_addr_a));
  assign pa_wr = bank_of(32'(wr_addr_a));
  assign pb_wr = bank_of(32'(wr_addr_b));

  // Route the logical ports to the banks.
  always_comb begin
    b0_raddr = pa_rd ? rd_addr_b[AW-1:1] : rd_addr_a[AW-1:1];
    b1_raddr = pa_rd ? rd_addr_a[AW-1:1] : rd_addr_b[AW-1:1];

    b0_we = 1'b0; b0_waddr = wr_addr_a[AW-1:1]; b0_wdata = wr_data_a;
    b1_we = 1'b0; b1_waddr = wr_addr_a[AW-1:1]; b1_wdata = wr_data_a;
    if (wr_en_b) begin
      if (pb_wr) begin b1_we = 1'b1; b1_waddr = wr_addr_b[AW-1:1]; b1_wdata = wr_data_b; end
      else       begin b0_we = 1'b1; b0_waddr = wr_addr_b[AW-1:1]; b0_wdata = wr_data_b; end
    end
    if (wr_en_a) begin
      if (pa_wr) begin b1_we = 1'b1; b1_waddr = wr_addr_a[AW-1:1]; b1_wdata = wr_data_a; end
      else       begin b0_we = 1'b1; b0_waddr = wr_addr_a[AW-1:1]; b0_wdata = wr_data_a; end
    end
  end

  always_ff @(posedge clk) begin
    if (b0_we) bank0[b0_waddr] <= b0_wdata;
    b0_q <= bank0[b0_raddr];
  end

  always_ff @(posedge clk) begin
    if (b1_we) bank1[b1_waddr] <= b1_wdata;
    b1_q <= bank1[b1_raddr];
  end

  always_ff @(posedge clk) pa_rd_q <= pa_rd;

  assign rd_data_a = pa_rd_q ? b1_q : b0_q;
  assign rd_data_b = pa_rd_q ? b0_q : b1_q;

  // Two simultaneous writes must go to different banks.
  a_wr_banks: assert property (@(posedge clk) (wr_en_a && wr_en_b) |-> (pa_wr != pb_wr))
    else $error("fft_buffer: both write ports address bank %0d", pa_wr);

endmodule
