// elemwise_mult: point-by-point product of the two spectra of a chunk pair.
//
// For k = 0 .. N-1 it reads X[k] and H[k] from the two forward-FFT buffers,
// forms the complex product P = X*H at full precision, shifts it right by
// the run-time amount mul_shift with rounding, saturates each part to
// DATA_W bits and writes it into the IFFT buffer at the bit-reversed address
// bitrev(k), which is the order the decimation-in-time IFFT expects.
// Every saturated part increments sat_count (cleared at start).
//
// One point per clock; pipeline read (1) -> products (1) -> shift/saturate
// (1) -> write. From the cycle `start` is seen to the cycle `done` is high
// takes exactly N + 5 cycles. The paper states the element-wise product
// (its eq. (1) and the "Elem-wise Mult" block); the scaling, saturation and
// the bit-reversed write are this design's choices.
module elemwise_mult
  import fftconv_pkg::*;
#(
  parameter int unsigned N = 16384
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [5:0]           mul_shift,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          sat_count,
  // reads of the X and H spectra (port A of each buffer)
  output logic [$clog2(N)-1:0] rd_addr,
  input  cplx_t                x_data,
  input  cplx_t                h_data,
  // writes into the IFFT buffer (port A)
  output logic                 wr_en,
  output logic [$clog2(N)-1:0] wr_addr,
  output cplx_t                wr_data
);

  localparam int unsigned AW = $clog2(N);
  localparam int unsigned PW = 2 * DATA_W + 1;   // width of re/im of X*H

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t state;

  logic [AW-1:0] k;
  logic          p0_v, p1_v, p2_v;
  logic [AW-1:0] p0_k, p1_k;
  logic signed [2*DATA_W-1:0] p1_rr, p1_ii, p1_ri, p1_ir;
  cplx_t         p2_y;
  logic [AW-1:0] p2_a;

  assign rd_addr = k;

  // shift with rounding and saturation of one product part
  function automatic data_t scale_sat(input logic signed [PW-1:0] v,
                                      input logic [5:0] sh, output logic sat);
    logic signed [PW-1:0] r;
    r = (sh == 0) ? v : ((v + (PW'(1) <<< (sh - 1))) >>> sh);
    sat = 1'b0;
    if (r > PW'(signed'({1'b0, {(DATA_W-1){1'b1}}}))) begin
      sat = 1'b1;
      return {1'b0, {(DATA_W-1){1'b1}}};
    end
    if (r < -(PW'(1) <<< (DATA_W - 1))) begin
      sat = 1'b1;
      return {1'b1, {(DATA_W-1){1'b0}}};
    end
    return DATA_W'(r);
  endfunction

  data_t y_re, y_im;
  logic  sat_re, sat_im;
  always_comb begin
    y_re = scale_sat(PW'(p1_rr) - PW'(p1_ii), mul_shift, sat_re);
    y_im = scale_sat(PW'(p1_ri) + PW'(p1_ir), mul_shift, sat_im);
  end

  always_ff @(posedge clk) begin
    p0_k  <= k;
    p1_k  <= p0_k;
    p1_rr <= (2*DATA_W)'(x_data.re) * (2*DATA_W)'(h_data.re);
    p1_ii <= (2*DATA_W)'(x_data.im) * (2*DATA_W)'(h_data.im);
    p1_ri <= (2*DATA_W)'(x_data.re) * (2*DATA_W)'(h_data.im);
    p1_ir <= (2*DATA_W)'(x_data.im) * (2*DATA_W)'(h_data.re);
    p2_y  <= '{re: y_re, im: y_im};
    p2_a  <= AW'(bitrev(32'(p1_k), AW));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      k         <= '0;
      p0_v      <= 1'b0;
      p1_v      <= 1'b0;
      p2_v      <= 1'b0;
      sat_count <= '0;
    end else begin
      p0_v <= (state == S_RUN);
      p1_v <= p0_v;
      p2_v <= p1_v;
      if (p1_v) sat_count <= sat_count + 32'(sat_re) + 32'(sat_im);
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_RUN;
          k         <= '0;
          sat_count <= '0;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (k == AW'(N - 1)) state <= S_DRAIN;
        end
        S_DRAIN: if (!p0_v && !p1_v && !p2_v) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign wr_en   = p2_v;
  assign wr_addr = p2_a;
  assign wr_data = p2_y;
  assign busy    = (state != S_IDLE);
  assign done    = (state == S_DONE);

endmodule
