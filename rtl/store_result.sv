// store_result: streams one chunk-pair result out of the kernel
// ("Store Result, stream -> DDR").
//
// After `start` it reads words 0 .. len-1 of the IFFT buffer in natural
// order and sends the real part of each on a valid/ready output stream,
// with m_last on the final word. The imaginary part of the convolution of
// two real chunks is zero up to rounding and is dropped. Because the buffer
// read takes one cycle, a two-entry output queue with read credits lets the
// stream run at one word per clock and stop at any time under back-pressure
// without losing words. With m_ready held high, from the cycle `start` is
// seen to the cycle `done` is high takes exactly len + 3 cycles.
// The paper names the block and its destination (device DDR, then D2H); the
// stream interface and the queue are this design's choices.
module store_result
  import fftconv_pkg::*;
#(
  parameter int unsigned N = 16384
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(N+1)-1:0] len,
  output logic                   busy,
  output logic                   done,
  // buffer read port (port A)
  output logic [$clog2(N)-1:0]   rd_addr,
  input  cplx_t                  rd_data,
  // result stream
  output logic                   m_valid,
  input  logic                   m_ready,
  output data_t                  m_data,
  output logic                   m_last
);

  localparam int unsigned AW = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t state;

  logic [AW:0]  rd_n, out_n, len_q;
  logic         inflight;
  logic [1:0]   count;
  data_t        q0, q1;
  logic         last0, last1, inflight_last;
  logic         issue, pop, push;

  assign pop   = m_valid && m_ready;
  assign push  = inflight;
  assign issue = (state == S_RUN) && (rd_n < len_q) &&
                 ((3'(count) + 3'(inflight) - 3'(pop)) < 3'd2);
  assign rd_addr = AW'(rd_n);

  assign m_valid = (count != 2'd0);
  assign m_data  = q0;
  assign m_last  = last0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      rd_n          <= '0;
      out_n         <= '0;
      len_q         <= '0;
      inflight      <= 1'b0;
      inflight_last <= 1'b0;
      count         <= '0;
      q0            <= '0;
      q1            <= '0;
      last0         <= 1'b0;
      last1         <= 1'b0;
    end else begin
      inflight      <= issue;
      inflight_last <= issue && (rd_n + 1'b1 == len_q);
      if (issue) rd_n <= rd_n + 1'b1;

      // two-entry queue: q0 is the head
      unique case ({push, pop})
        2'b10: begin
          if (count == 2'd0) begin q0 <= rd_data.re; last0 <= inflight_last; end
          else               begin q1 <= rd_data.re; last1 <= inflight_last; end
          count <= count + 1'b1;
        end
        2'b01: begin
          q0 <= q1; last0 <= last1;
          count <= count - 1'b1;
        end
        2'b11: begin
          if (count == 2'd1) begin q0 <= rd_data.re; last0 <= inflight_last; end
          else begin
            q0 <= q1; last0 <= last1;
            q1 <= rd_data.re; last1 <= inflight_last;
          end
        end
        default: ;
      endcase

      if (pop) out_n <= out_n + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          rd_n  <= '0;
          out_n <= '0;
          len_q <= len;
        end
        S_RUN:   if (pop && out_n + 1'b1 == len_q) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             (m_valid && !m_ready) |=> (m_valid && $stable(m_data)))
    else $error("store_result: output changed while stalled");

endmodule
