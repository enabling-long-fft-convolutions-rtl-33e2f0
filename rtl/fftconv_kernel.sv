// fftconv_kernel: FPGA kernel that convolves one chunk pair by FFT.
//
// Long convolutions y = x * h are split by the host into chunks of at most
// CHUNK samples; for every pair (x_i, h_j) the host calls this kernel once
// and adds the 2*CHUNK-1 point result into y at offset (i+j)*CHUNK
// (overlap-add). One call runs these phases in order:
//   LOAD_X  take len_x samples of x_i from the input stream into buffer X
//           (bit-reversed, zero-padded to N = 2*CHUNK points)
//   LOAD_H  the same for the next len_h samples of h_j into buffer H
//   FFT_X   forward radix-2 DIT FFT of buffer X in place
//   FFT_H   forward FFT of buffer H in place
//   MULT    Y[bitrev(k)] = (X[k]*H[k]) >> mul_shift, saturated
//   IFFT    inverse FFT of buffer Y in place (scaled by 1/N)
//   STORE   stream Re(Y[0 .. len_x+len_h-2]) out, m_last on the final word
// so that m_data carries conv(x_i, h_j) / 2**mul_shift, rounded.
// X, H and Y are fft_buffer instances; one twiddle_rom serves the forward
// engine on port A and the inverse engine on port B.
//
// Interface: pulse `start` while idle with len_x, len_h (1..CHUNK) and
// mul_shift valid; they are latched. `done` pulses once the last result word
// has been accepted. sat_count gives the number of saturated product parts
// of the last call (a non-zero value means mul_shift was too small).
// Timing with a stream that never pauses and m_ready high, from the start
// cycle to the done cycle: 2*(N+2) + 3*(F+1) + (N+6) + (L+4) + 1 cycles,
// with F = log2(N)*(N/2+4)+1 and L = len_x+len_h-1.
//
// The sequence FFT -> element-wise multiply -> IFFT -> store, the buffers and
// twiddles in on-chip memory, the 8192-point chunk and the host-side
// overlap-add follow the paper. The FFT length of 2*CHUNK, the fixed-point
// formats, the stream interfaces and sending both chunks on one stream are
// this design's choices.
module fftconv_kernel
  import fftconv_pkg::*;
#(
  parameter int unsigned CHUNK = 8192,         // largest chunk, in samples
  parameter int unsigned N     = 2 * CHUNK     // FFT length
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(CHUNK+1)-1:0] len_x,
  input  logic [$clog2(CHUNK+1)-1:0] len_h,
  input  logic [5:0]                 mul_shift,
  output logic                       busy,
  output logic                       done,
  output logic [31:0]                sat_count,
  // host-to-device stream: len_x samples of x, then len_h samples of h
  input  logic                       s_valid,
  output logic                       s_ready,
  input  in_t                        s_data,
  // result stream towards device memory
  output logic                       m_valid,
  input  logic                       m_ready,
  output data_t                      m_data,
  output logic                       m_last
);

  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned TAW = $clog2(N/2);

  typedef enum logic [3:0] {
    K_IDLE, K_LOAD_X, K_LOAD_H, K_FFT_X, K_FFT_H, K_MULT, K_IFFT, K_STORE, K_DONE
  } kstate_t;
  kstate_t state;
  logic    kick;                 // first cycle of a phase: starts its unit

  logic [$clog2(CHUNK+1)-1:0] len_x_q, len_h_q;
  logic [5:0]                 shift_q;

  // ---------------- units ----------------
  logic ld_busy, ld_done, fw_busy, fw_done, mu_busy, mu_done, iv_busy, iv_done, st_busy, st_done;
  logic ld_wr_en;  logic [AW-1:0] ld_wr_addr;  cplx_t ld_wr_data;

  logic [AW-1:0] fw_rd_addr_a, fw_rd_addr_b, fw_wr_addr_a, fw_wr_addr_b;
  logic          fw_wr_en_a, fw_wr_en_b;
  cplx_t         fw_rd_data_a, fw_rd_data_b, fw_wr_data_a, fw_wr_data_b;
  logic [TAW-1:0] fw_tw_addr, iv_tw_addr;
  tw_t           fw_tw_data, iv_tw_data;

  logic [AW-1:0] iv_rd_addr_a, iv_rd_addr_b, iv_wr_addr_a, iv_wr_addr_b;
  logic          iv_wr_en_a, iv_wr_en_b;
  cplx_t         iv_rd_data_a, iv_rd_data_b, iv_wr_data_a, iv_wr_data_b;

  logic [AW-1:0] mu_rd_addr, mu_wr_addr;
  logic          mu_wr_en;
  cplx_t         mu_wr_data;

  logic [AW-1:0] st_rd_addr;

  // buffer ports
  logic [AW-1:0] x_ra, x_rb, x_wa, x_wb, h_ra, h_rb, h_wa, h_wb, y_ra, y_rb, y_wa, y_wb;
  logic          x_wea, x_web, h_wea, h_web, y_wea, y_web;
  cplx_t         x_qa, x_qb, h_qa, h_qb, y_qa, y_qb, x_da, x_db, h_da, h_db, y_da, y_db;

  chunk_loader #(.CHUNK(CHUNK), .N(N)) u_loader (
    .clk, .rst_n,
    .start   (kick && (state == K_LOAD_X || state == K_LOAD_H)),
    .len     (state == K_LOAD_H ? len_h_q : len_x_q),
    .busy    (ld_busy), .done (ld_done),
    .s_valid, .s_ready, .s_data,
    .wr_en   (ld_wr_en), .wr_addr (ld_wr_addr), .wr_data (ld_wr_data)
  );

  fft_radix2 #(.N(N), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n,
    .start     (kick && (state == K_FFT_X || state == K_FFT_H)),
    .busy      (fw_busy), .done (fw_done),
    .rd_addr_a (fw_rd_addr_a), .rd_addr_b (fw_rd_addr_b),
    .rd_data_a (fw_rd_data_a), .rd_data_b (fw_rd_data_b),
    .wr_en_a   (fw_wr_en_a), .wr_addr_a (fw_wr_addr_a), .wr_data_a (fw_wr_data_a),
    .wr_en_b   (fw_wr_en_b), .wr_addr_b (fw_wr_addr_b), .wr_data_b (fw_wr_data_b),
    .tw_addr   (fw_tw_addr), .tw_data (fw_tw_data)
  );

  elemwise_mult #(.N(N)) u_mult (
    .clk, .rst_n,
    .start     (kick && state == K_MULT),
    .mul_shift (shift_q),
    .busy      (mu_busy), .done (mu_done),
    .sat_count,
    .rd_addr   (mu_rd_addr), .x_data (x_qa), .h_data (h_qa),
    .wr_en     (mu_wr_en), .wr_addr (mu_wr_addr), .wr_data (mu_wr_data)
  );

  fft_radix2 #(.N(N), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n,
    .start     (kick && state == K_IFFT),
    .busy      (iv_busy), .done (iv_done),
    .rd_addr_a (iv_rd_addr_a), .rd_addr_b (iv_rd_addr_b),
    .rd_data_a (iv_rd_data_a), .rd_data_b (iv_rd_data_b),
    .wr_en_a   (iv_wr_en_a), .wr_addr_a (iv_wr_addr_a), .wr_data_a (iv_wr_data_a),
    .wr_en_b   (iv_wr_en_b), .wr_addr_b (iv_wr_addr_b), .wr_data_b (iv_wr_data_b),
    .tw_addr   (iv_tw_addr), .tw_data (iv_tw_data)
  );

  store_result #(.N(N)) u_store (
    .clk, .rst_n,
    .start   (kick && state == K_STORE),
    .len     (($clog2(N+1))'(len_x_q) + ($clog2(N+1))'(len_h_q) - 1'b1),
    .busy    (st_busy), .done (st_done),
    .rd_addr (st_rd_addr), .rd_data (y_qa),
    .m_valid, .m_ready, .m_data, .m_last
  );

  twiddle_rom #(.N(N)) u_twiddles (
    .clk,
    .rd_addr_a (fw_tw_addr), .rd_data_a (fw_tw_data),
    .rd_addr_b (iv_tw_addr), .rd_data_b (iv_tw_data)
  );

  fft_buffer #(.N(N)) u_buf_x (
    .clk, .rd_addr_a (x_ra), .rd_addr_b (x_rb), .rd_data_a (x_qa), .rd_data_b (x_qb),
    .wr_en_a (x_wea), .wr_addr_a (x_wa), .wr_data_a (x_da),
    .wr_en_b (x_web), .wr_addr_b (x_wb), .wr_data_b (x_db)
  );
  fft_buffer #(.N(N)) u_buf_h (
    .clk, .rd_addr_a (h_ra), .rd_addr_b (h_rb), .rd_data_a (h_qa), .rd_data_b (h_qb),
    .wr_en_a (h_wea), .wr_addr_a (h_wa), .wr_data_a (h_da),
    .wr_en_b (h_web), .wr_addr_b (h_wb), .wr_data_b (h_db)
  );
  fft_buffer #(.N(N)) u_buf_y (
    .clk, .rd_addr_a (y_ra), .rd_addr_b (y_rb), .rd_data_a (y_qa), .rd_data_b (y_qb),
    .wr_en_a (y_wea), .wr_addr_a (y_wa), .wr_data_a (y_da),
    .wr_en_b (y_web), .wr_addr_b (y_wb), .wr_data_b (y_db)
  );

  // ---------------- buffer port steering ----------------
  // The forward engine result of the phase that is not using it is ignored.
  assign fw_rd_data_a = (state == K_FFT_H) ? h_qa : x_qa;
  assign fw_rd_data_b = (state == K_FFT_H) ? h_qb : x_qb;
  assign iv_rd_data_a = y_qa;
  assign iv_rd_data_b = y_qb;

  always_comb begin
    // X buffer: loader (LOAD_X), forward FFT (FFT_X), multiplier reads
    x_ra = fw_rd_addr_a; x_rb = fw_rd_addr_b;
    x_wea = 1'b0; x_wa = fw_wr_addr_a; x_da = fw_wr_data_a;
    x_web = 1'b0; x_wb = fw_wr_addr_b; x_db = fw_wr_data_b;
    // H buffer: loader (LOAD_H), forward FFT (FFT_H), multiplier reads
    h_ra = fw_rd_addr_a; h_rb = fw_rd_addr_b;
    h_wea = 1'b0; h_wa = fw_wr_addr_a; h_da = fw_wr_data_a;
    h_web = 1'b0; h_wb = fw_wr_addr_b; h_db = fw_wr_data_b;
    // Y buffer: multiplier writes, inverse FFT, store reads
    y_ra = iv_rd_addr_a; y_rb = iv_rd_addr_b;
    y_wea = iv_wr_en_a; y_wa = iv_wr_addr_a; y_da = iv_wr_data_a;
    y_web = iv_wr_en_b; y_wb = iv_wr_addr_b; y_db = iv_wr_data_b;

    unique case (state)
      K_LOAD_X: begin x_wea = ld_wr_en; x_wa = ld_wr_addr; x_da = ld_wr_data; end
      K_LOAD_H: begin h_wea = ld_wr_en; h_wa = ld_wr_addr; h_da = ld_wr_data; end
      K_FFT_X:  begin x_wea = fw_wr_en_a; x_web = fw_wr_en_b; end
      K_FFT_H:  begin h_wea = fw_wr_en_a; h_web = fw_wr_en_b; end
      K_MULT: begin
        x_ra = mu_rd_addr; h_ra = mu_rd_addr;
        y_wea = mu_wr_en; y_wa = mu_wr_addr; y_da = mu_wr_data;
        y_web = 1'b0;
      end
      K_STORE: y_ra = st_rd_addr;
      default: ;
    endcase
  end

  // ---------------- phase sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= K_IDLE;
      kick    <= 1'b0;
      len_x_q <= '0;
      len_h_q <= '0;
      shift_q <= '0;
    end else begin
      kick <= 1'b0;
      unique case (state)
        K_IDLE: if (start) begin
          len_x_q <= len_x;
          len_h_q <= len_h;
          shift_q <= mul_shift;
          state   <= K_LOAD_X;
          kick    <= 1'b1;
        end
        K_LOAD_X: if (ld_done) begin state <= K_LOAD_H; kick <= 1'b1; end
        K_LOAD_H: if (ld_done) begin state <= K_FFT_X;  kick <= 1'b1; end
        K_FFT_X:  if (fw_done) begin state <= K_FFT_H;  kick <= 1'b1; end
        K_FFT_H:  if (fw_done) begin state <= K_MULT;   kick <= 1'b1; end
        K_MULT:   if (mu_done) begin state <= K_IFFT;   kick <= 1'b1; end
        K_IFFT:   if (iv_done) begin state <= K_STORE;  kick <= 1'b1; end
        K_STORE:  if (st_done) state <= K_DONE;
        K_DONE:   state <= K_IDLE;
        default:  state <= K_IDLE;
      endcase
    end
  end

  assign busy = (state != K_IDLE);
  assign done = (state == K_DONE);

  // The phases never overlap: at most one unit runs at a time.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0({ld_busy, fw_busy, mu_busy, iv_busy, st_busy}))
    else $error("fftconv_kernel: two units busy at once");

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> (state == K_IDLE))
    else $error("fftconv_kernel: start while busy");

endmodule
