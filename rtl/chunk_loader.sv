// chunk_loader: moves one chunk from the host-to-device stream into a
// buffer, ready for the decimation-in-time FFT.
//
// After `start` it takes `len` real samples (1 <= len <= CHUNK) from the
// valid/ready input stream and writes sample n, as the complex word
// (sample, 0), to buffer address bitrev(n). It then writes zeros to the
// remaining N - len positions, which zero-pads the chunk to the FFT length
// (a short last chunk of a sequence is padded the same way). One word is
// written per clock; the stream may pause (s_valid low), which stalls the
// loader. The imaginary half of wr_data is always zero (the inputs are
// real); it is kept so the port matches the buffer's word. With no pauses,
// from the cycle `start` is seen to the cycle `done` is high takes exactly
// N + 1 cycles.
// The paper shows the host sending chunks to the kernel (H2D); the stream
// interface, the bit-reversed write and the padding are this design's.
module chunk_loader
  import fftconv_pkg::*;
#(
  parameter int unsigned CHUNK = 8192,
  parameter int unsigned N     = 2 * CHUNK
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(CHUNK+1)-1:0] len,
  output logic                       busy,
  output logic                       done,
  // host stream
  input  logic                       s_valid,
  output logic                       s_ready,
  input  in_t                        s_data,
  // buffer write port (port A)
  output logic                       wr_en,
  output logic [$clog2(N)-1:0]       wr_addr,
  output cplx_t                      wr_data
);

  localparam int unsigned AW = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_PAD, S_DONE} state_t;
  state_t state;

  logic [AW:0]                  n;
  logic [$clog2(CHUNK+1)-1:0]   len_q;

  assign s_ready = (state == S_STREAM);
  assign wr_en   = (state == S_STREAM && s_valid) || (state == S_PAD);
  assign wr_addr = AW'(bitrev(32'(n), AW));
  always_comb begin
    wr_data = '0;
    if (state == S_STREAM) wr_data.re = DATA_W'(s_data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      n     <= '0;
      len_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          n     <= '0;
          len_q <= len;
          state <= S_STREAM;
        end
        S_STREAM: if (s_valid) begin
          n <= n + 1'b1;
          if (n + 1'b1 == (AW+1)'(len_q))
            state <= (n + 1'b1 == (AW+1)'(N)) ? S_DONE : S_PAD;
        end
        S_PAD: begin
          n <= n + 1'b1;
          if (n == (AW+1)'(N - 1)) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          (state == S_IDLE && start) |-> (len >= 1 && len <= ($bits(len))'(CHUNK)))
    else $error("chunk_loader: len %0d out of range 1..%0d", len, CHUNK);

endmodule
