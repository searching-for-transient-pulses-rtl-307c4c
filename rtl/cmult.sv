// cmult: pipelined complex multiplier of the beamformer: a 32-bit complex
// coefficient (16-bit I/Q) times a 36-bit complex data word (18-bit I/Q) gives
// a 70-bit complex product (35-bit I/Q), exactly, with a 3-cycle latency and
// four real multipliers (one 18x18 block each on the original FPGA).  These
// figures are printed in the paper's beamforming figure.
//   cycle 1: register the operands
//   cycle 2: the four products ar*br, ai*bi, ar*bi, ai*br
//   cycle 3: re = ar*br - ai*bi, im = ar*bi + ai*br
// `in_valid` travels with the data to `out_valid`.
module cmult
  import eta_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  coef_t a,
  input  fftw_t b,
  output logic  out_valid,
  output prod_t p
);
  coef_t a_q;
  fftw_t b_q;
  logic signed [COEF_W+FFT_W-1:0] rr, ii, ri, ir;
  logic [1:0] v;

  always_ff @(posedge clk) begin
    a_q <= a;
    b_q <= b;
    rr  <= a_q.re * b_q.re;
    ii  <= a_q.im * b_q.im;
    ri  <= a_q.re * b_q.im;
    ir  <= a_q.im * b_q.re;
    p.re <= PROD_W'(rr) - PROD_W'(ii);
    p.im <= PROD_W'(ri) + PROD_W'(ir);
  end

  always_ff @(posedge clk) begin
    if (rst) {out_valid, v} <= '0;
    else     {out_valid, v} <= {v, in_valid};
  end
endmodule
