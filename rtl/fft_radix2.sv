// fft_radix2: in-place radix-2 decimation-in-time FFT engine (forward or
// inverse) working on one fft_buffer.
//
// The Cooley-Tukey radix-2 DIT algorithm: the buffer must hold the input in
// bit-reversed order; after log2(N) stages it holds the transform in natural
// order. Stage s (s = 0 .. log2(N)-1) pairs word i0 with i1 = i0 + 2**s,
// where for butterfly b (b = 0 .. N/2-1) j = b mod 2**s and
// i0 = (b div 2**s) * 2**(s+1) + j, and uses twiddle W_N^(j * N/2**(s+1)):
//     t = W * x[i1];  x[i0] <= x[i0] + t;  x[i1] <= x[i0] - t.
// INVERSE = 1 conjugates the twiddles and halves both results of every
// butterfly (rounding), so the inverse transform carries the 1/N factor.
//
// One butterfly is issued per clock. The pipeline is: issue addresses ->
// buffer/twiddle read (1 cycle) -> four products registered -> sums
// registered -> write back. Between stages the engine waits until the last
// write of the stage has landed, so with rd-after-wr ordering guaranteed a
// stage takes N/2 + 4 cycles. From the cycle `start` is seen high to the
// cycle `done` is high takes exactly log2(N) * (N/2 + 4) + 1 cycles.
//
// Forward mode does not scale: with inputs of IN_W bits and N <= 2**15 the
// growth fits DATA_W. The paper gives the algorithm (radix-2 DIT, twiddles
// and buffers in BRAM); the pipeline, the in-place banked addressing and
// the fixed-point scaling are this design's choices.
module fft_radix2
  import fftconv_pkg::*;
#(
  parameter int unsigned N       = 16384,    // FFT length (power of two)
  parameter bit          INVERSE = 1'b0      // 0: FFT, 1: IFFT with 1/N
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,      // one-cycle pulse while idle
  output logic                   busy,
  output logic                   done,       // one-cycle pulse at the end
  // buffer ports (see fft_buffer)
  output logic [$clog2(N)-1:0]   rd_addr_a,
  output logic [$clog2(N)-1:0]   rd_addr_b,
  input  cplx_t                  rd_data_a,
  input  cplx_t                  rd_data_b,
  output logic                   wr_en_a,
  output logic [$clog2(N)-1:0]   wr_addr_a,
  output cplx_t                  wr_data_a,
  output logic                   wr_en_b,
  output logic [$clog2(N)-1:0]   wr_addr_b,
  output cplx_t                  wr_data_b,
  // twiddle ROM port
  output logic [$clog2(N/2)-1:0] tw_addr,
  input  tw_t                    tw_data
);

  localparam int unsigned LOG2N = $clog2(N);
  localparam int unsigned AW    = LOG2N;
  localparam int unsigned PW    = DATA_W + TW_W;      // product width

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t state;

  logic [$clog2(LOG2N+1)-1:0] stage;
  logic [AW-2:0]              bfly;

  // ---------------- address generation (issue cycle) ----------------
  logic [31:0] j, i0, i1, twi;
  always_comb begin
    j   = 32'(bfly) & ((32'd1 << stage) - 32'd1);
    i0  = ((32'(bfly) >> stage) << (stage + 1)) | j;
    i1  = i0 | (32'd1 << stage);
    twi = j << (32'(LOG2N - 1) - 32'(stage));
  end

  logic issue;
  assign issue     = (state == S_RUN);
  assign rd_addr_a = AW'(i0);
  assign rd_addr_b = AW'(i1);
  assign tw_addr   = (AW-1)'(twi);

  // ---------------- pipeline ----------------
  logic          p0_v, p1_v, p2_v;
  logic [AW-1:0] p0_i0, p0_i1, p1_i0, p1_i1, p2_i0, p2_i1;
  cplx_t         p1_u;
  logic signed [PW-1:0] p1_rr, p1_ii, p1_ri, p1_ir;
  cplx_t         p2_x0, p2_x1;

  tw_t w;
  always_comb begin
    w = tw_data;
    if (INVERSE) w.im = -tw_data.im;
  end

  // butterfly sums of the registered products
  localparam logic signed [PW:0] RND = (PW+1)'(1) <<< (TW_FRAC - 1);
  logic signed [PW:0]       t_re_w, t_im_w;
  logic signed [DATA_W+1:0] s_re, s_im, d_re, d_im;
  always_comb begin
    t_re_w = ((PW+1)'(p1_rr) - (PW+1)'(p1_ii) + RND) >>> TW_FRAC;
    t_im_w = ((PW+1)'(p1_ri) + (PW+1)'(p1_ir) + RND) >>> TW_FRAC;
    s_re   = (DATA_W+2)'(p1_u.re) + (DATA_W+2)'(t_re_w);
    s_im   = (DATA_W+2)'(p1_u.im) + (DATA_W+2)'(t_im_w);
    d_re   = (DATA_W+2)'(p1_u.re) - (DATA_W+2)'(t_re_w);
    d_im   = (DATA_W+2)'(p1_u.im) - (DATA_W+2)'(t_im_w);
    if (INVERSE) begin
      s_re = (s_re + 1) >>> 1;
      s_im = (s_im + 1) >>> 1;
      d_re = (d_re + 1) >>> 1;
      d_im = (d_im + 1) >>> 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p0_v <= 1'b0; p1_v <= 1'b0; p2_v <= 1'b0;
    end else begin
      p0_v <= issue;
      p1_v <= p0_v;
      p2_v <= p1_v;
    end
  end

  always_ff @(posedge clk) begin
    p0_i0 <= AW'(i0);
    p0_i1 <= AW'(i1);
    // stage 1: operands and twiddle arrive from memory; form the products
    p1_i0 <= p0_i0;
    p1_i1 <= p0_i1;
    p1_u  <= rd_data_a;
    p1_rr <= PW'(rd_data_b.re) * PW'(w.re);
    p1_ii <= PW'(rd_data_b.im) * PW'(w.im);
    p1_ri <= PW'(rd_data_b.re) * PW'(w.im);
    p1_ir <= PW'(rd_data_b.im) * PW'(w.re);
    // stage 2: sums
    p2_i0    <= p1_i0;
    p2_i1    <= p1_i1;
    p2_x0.re <= DATA_W'(s_re);
    p2_x0.im <= DATA_W'(s_im);
    p2_x1.re <= DATA_W'(d_re);
    p2_x1.im <= DATA_W'(d_im);
  end

  assign wr_en_a   = p2_v;
  assign wr_addr_a = p2_i0;
  assign wr_data_a = p2_x0;
  assign wr_en_b   = p2_v;
  assign wr_addr_b = p2_i1;
  assign wr_data_b = p2_x1;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      stage <= '0;
      bfly  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          stage <= '0;
          bfly  <= '0;
        end
        S_RUN: begin
          bfly <= bfly + 1'b1;
          if (bfly == (AW-1)'(N/2 - 1)) state <= S_DRAIN;
        end
        S_DRAIN: if (!p0_v && !p1_v && !p2_v) begin
          if (stage == ($bits(stage))'(LOG2N - 1)) state <= S_DONE;
          else begin
            stage <= stage + 1'b1;
            state <= S_RUN;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

endmodule
