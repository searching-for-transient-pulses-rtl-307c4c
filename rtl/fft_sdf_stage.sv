// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipeline FFT, for blocks of L points.
//
// A delay line of L/2 words pairs sample k with sample k+L/2.  During the first
// half of a block the incoming samples fill the delay line while the previous
// block's differences leave it, each multiplied by the twiddle
// exp(-j*2*pi*k/L).  During the second half the stage outputs the sums and
// feeds the differences back into the delay line.  The stage thus emits, for
// each block, L/2 sums followed by L/2 twiddled differences: the inputs of the
// two half-size transforms.  `in_sync` marks the first sample of a block;
// `out_sync` marks the first sum, L/2+1 cycles later (output is registered).
// The stage runs every clock; samples between blocks must be zero.  Twiddles
// are Q1.16 values computed at elaboration; products are rounded to nearest.
module fft_sdf_stage #(
  parameter int unsigned L = 1024,
  parameter int unsigned W = 20
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_sync,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_sync,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im
);
  localparam int unsigned D  = L / 2;
  localparam int unsigned CW = $clog2(L);
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1;

  typedef logic signed [17:0] tw_t [D];
  function automatic tw_t mk_tw(input bit sine);
    tw_t r;
    for (int k = 0; k < D; k++) begin
      real a;
      a = 2.0 * 3.141592653589793 * k / L;
      r[k] = 18'($rtoi($floor(65536.0 * (sine ? -$sin(a) : $cos(a)) + 0.5)));
    end
    return r;
  endfunction
  localparam tw_t TW_RE = mk_tw(1'b0);   // cos
  localparam tw_t TW_IM = mk_tw(1'b1);   // -sin

  logic signed [W-1:0] dl_re [D];
  logic signed [W-1:0] dl_im [D];
  logic [DW-1:0]       ptr;
  logic [CW-1:0]       cnt, cur;
  logic                armed;
  logic signed [W-1:0] d_re, d_im, n_re, n_im, y_re, y_im;
  logic signed [W-1:0] wr, wi;
  logic signed [W+18:0] pr, pi;
  logic [DW-1:0]       k;

  assign cur  = in_sync ? '0 : cnt;
  assign d_re = dl_re[ptr];
  assign d_im = dl_im[ptr];
  assign k    = DW'(cur);

  always_comb begin
    wr = '0; wi = '0;
    // (d_re + j d_im)(c + j s), c = TW_RE[k], s = TW_IM[k]
    pr = (W+19)'(d_re) * (W+19)'(TW_RE[k]) - (W+19)'(d_im) * (W+19)'(TW_IM[k]) + (W+19)'(32768);
    pi = (W+19)'(d_re) * (W+19)'(TW_IM[k]) + (W+19)'(d_im) * (W+19)'(TW_RE[k]) + (W+19)'(32768);
    if (!cur[CW-1]) begin        // first half: store input, emit twiddled difference
      n_re = in_re;  n_im = in_im;
      y_re = W'(pr >>> 16);
      y_im = W'(pi >>> 16);
    end else begin               // second half: butterfly
      n_re = d_re - in_re;  n_im = d_im - in_im;
      y_re = d_re + in_re;  y_im = d_im + in_im;
    end
    wr = n_re; wi = n_im;
  end

  always_ff @(posedge clk) begin
    dl_re[ptr] <= wr;
    dl_im[ptr] <= wi;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr <= '0; cnt <= '0; armed <= 1'b0;
      out_sync <= 1'b0; out_re <= '0; out_im <= '0;
    end else begin
      ptr      <= (32'(ptr) == D - 1) ? '0 : ptr + 1'b1;
      cnt      <= cur + 1'b1;
      out_re   <= y_re;
      out_im   <= y_im;
      // one out_sync per in_sync, when that block's first sum leaves
      out_sync <= (armed || in_sync) && (32'(cur) == D);
      if (in_sync) armed <= 1'b1;
      else if (armed && 32'(cur) == D) armed <= 1'b0;
    end
  end
endmodule
