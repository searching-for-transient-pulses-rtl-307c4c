// fft1024: streaming 1024-point complex FFT of one antenna's samples, the
// "FFT" block of an outer node.
//
// The paper fixes the interface: 16-bit complex input, 36-bit complex output
// (18-bit I and Q), a 1024-cycle transform and a 1024-word output burst every
// 2048 cycles.  The insides are this design's: ten radix-2 single-path
// delay-feedback stages (fft_sdf_stage, 25-bit internal I/Q: 20 integer bits so
// that the full 10-bit growth of an 8-bit input never overflows, no scaling,
// and 5 fractional guard bits that keep the rounding noise of the early
// stages, which adds up over the later ones, below one output LSB) and a
// 1024-word reorder RAM that turns the bit-reversed stage output into natural
// bin order.  The result is the unscaled DFT X[k] = sum x[n] exp(-j2pi nk/1024),
// twiddle products rounded to nearest, saturated to 18 bits on output.
//
// Timing: the input is a burst of 1024 consecutive `in_valid` cycles, the first
// marked `in_sync`; bursts must start at least 2048 cycles apart.  The last
// stage's bit-reversed stream starts 1033 cycles after `in_sync` and is written
// into the reorder RAM; bins 0..1023 then leave in order on 1024 consecutive
// `out_valid` cycles, the first (bin 0, `out_sync`) 2058 cycles after `in_sync`.
// `in_tag` is carried to `out_tag` (the vector number).
module fft1024
  import eta_pkg::*;
#(
  parameter int unsigned GUARD = 5,            // fractional guard bits
  parameter int unsigned IW    = 20 + GUARD      // internal I/Q width
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic         in_sync,
  input  samp_t        in_data,
  input  logic [2:0]   in_tag,
  output logic         out_valid,
  output logic         out_sync,
  output logic [FFT_LOG2N-1:0] out_bin,
  output fftw_t        out_data,
  output logic [2:0]   out_tag
);
  localparam int unsigned NS = FFT_LOG2N;

  logic                 s_sync [NS+1];
  logic signed [IW-1:0] s_re   [NS+1];
  logic signed [IW-1:0] s_im   [NS+1];

  assign s_sync[0] = in_valid && in_sync;
  assign s_re[0]   = in_valid ? (IW'(in_data.re) <<< GUARD) : '0;
  assign s_im[0]   = in_valid ? (IW'(in_data.im) <<< GUARD) : '0;

  for (genvar s = 0; s < NS; s++) begin : g_stage
    fft_sdf_stage #(.L(FFT_N >> s), .W(IW)) u_st (
      .clk, .rst,
      .in_sync(s_sync[s]), .in_re(s_re[s]), .in_im(s_im[s]),
      .out_sync(s_sync[s+1]), .out_re(s_re[s+1]), .out_im(s_im[s+1]));
  end

  // tag capture
  logic [2:0] tag_q;
  always_ff @(posedge clk) begin
    if (rst) tag_q <= '0;
    else if (in_valid && in_sync) tag_q <= in_tag;
  end

  // reorder RAM: write in bit-reversed order, read in natural order
  fftw_t mem [FFT_N];
  logic              wr_act, rd_act;
  logic [FFT_LOG2N-1:0] wcnt, rcnt;
  logic [2:0]        wtag;
  fftw_t             wword;

  // drop the guard bits (round half up) and saturate to 18 bits
  function automatic logic signed [FFT_W-1:0] sat(input logic signed [IW-1:0] x);
    logic signed [IW-1:0] v;
    v = (x + IW'(1 <<< (GUARD-1))) >>> GUARD;
    if (v > IW'((1 <<< (FFT_W-1)) - 1)) return FFT_W'((1 <<< (FFT_W-1)) - 1);
    if (v < -IW'(1 <<< (FFT_W-1)))      return FFT_W'(-(1 <<< (FFT_W-1)));
    return FFT_W'(v);
  endfunction

  assign wword.re = sat(s_re[NS]);
  assign wword.im = sat(s_im[NS]);

  always_ff @(posedge clk) begin
    if (s_sync[NS] || wr_act)
      mem[bitrev(s_sync[NS] ? '0 : wcnt)] <= wword;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_act <= 1'b0; rd_act <= 1'b0; wcnt <= '0; rcnt <= '0; wtag <= '0;
      out_valid <= 1'b0; out_sync <= 1'b0; out_bin <= '0; out_data <= '0; out_tag <= '0;
    end else begin
      if (s_sync[NS]) begin
        wr_act <= 1'b1; wcnt <= 1; wtag <= tag_q;
      end else if (wr_act) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == '1) begin
          wr_act <= 1'b0; rd_act <= 1'b1; rcnt <= '0;
        end
      end
      out_valid <= rd_act;
      out_sync  <= rd_act && (rcnt == '0);
      if (rd_act) begin
        out_bin  <= rcnt;
        out_data <= mem[rcnt];
        out_tag  <= wtag;
        rcnt     <= rcnt + 1'b1;
        if (rcnt == '1) rd_act <= 1'b0;
      end
    end
  end
endmodule
