// test_input_gen: synthetic antenna data for bit-error and datapath tests, the
// "Test Inputs" block of an outer node.  It stands in for the S25 stream and
// has the same output interface as s25_input_decode.
//
// The paper names the two kinds of test data, counter and numerically
// controlled oscillator (NCO) output; the patterns themselves are this design's
// choice.  Samples are produced at RATE_NUM/RATE_DEN of the node clock (3/25 of
// 62.5 MHz = 7.5 MSPS, the receiver nodes' rate) by a fractional accumulator.
//   counter: A.re, A.im, B.re, B.im are c, c+1, c+2, c+3 and c advances by 4
//            per sample, so every byte lane counts by 4.  (Antenna A is
//            element 0 of the sample array, i.e. the low half of the word.)
//   NCO:     a 16-bit phase accumulator advanced by `phase_inc` per sample;
//            antenna A is the complex tone round(127*exp(j*phase)), antenna B the
//            same tone `phase_off` further on.  The 256-entry cosine table is
//            computed at elaboration from $cos.
// Sample indices run 0..1023 within a vector and the vector number counts
// vectors, as they do for received data.  Everything restarts when `enable`
// rises.  Output is registered.
module test_input_gen
  import eta_pkg::*;
#(
  parameter int unsigned RATE_NUM = 3,
  parameter int unsigned RATE_DEN = 25
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              enable,
  input  logic              nco_mode,     // 0 counter, 1 NCO
  input  logic [15:0]       phase_inc,
  input  logic [15:0]       phase_off,
  output logic              out_valid,
  output samp_t [N_ANT-1:0] out_samp,
  output logic [FFT_LOG2N-1:0] out_idx,
  output logic [2:0]        out_seq
);
  typedef logic signed [SAMP_W-1:0] lut_t [256];
  function automatic lut_t mk_cos();
    lut_t r;
    for (int i = 0; i < 256; i++)
      r[i] = SAMP_W'($rtoi($floor(127.0 * $cos(2.0 * 3.141592653589793 * i / 256.0) + 0.5)));
    return r;
  endfunction
  localparam lut_t COS_LUT = mk_cos();

  logic [$clog2(RATE_DEN+RATE_NUM):0] acc;
  logic [7:0]  cnt;
  logic [15:0] phase, pb;
  logic        tick, en_d;
  logic [FFT_LOG2N-1:0] idx;
  logic [2:0]  seq;

  assign tick = (32'(acc) + RATE_NUM >= RATE_DEN);
  assign pb   = phase + phase_off;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc <= '0; cnt <= '0; phase <= '0; en_d <= 1'b0; idx <= '0; seq <= '0;
      out_valid <= 1'b0; out_samp <= '0; out_idx <= '0; out_seq <= '0;
    end else begin
      en_d      <= enable;
      out_valid <= 1'b0;
      if (enable && !en_d) begin
        acc <= '0; cnt <= '0; phase <= '0; idx <= '0; seq <= '0;
      end else if (enable) begin
        acc <= tick ? $bits(acc)'(32'(acc) + RATE_NUM - RATE_DEN)
                    : $bits(acc)'(32'(acc) + RATE_NUM);
        if (tick) begin
          out_valid <= 1'b1;
          out_idx   <= idx;
          out_seq   <= seq;
          if (nco_mode) begin
            out_samp[0].re <= COS_LUT[phase[15:8]];
            out_samp[0].im <= COS_LUT[8'(phase[15:8] - 8'd64)];   // sin = cos(x-90deg)
            out_samp[1].re <= COS_LUT[pb[15:8]];
            out_samp[1].im <= COS_LUT[8'(pb[15:8] - 8'd64)];
          end else begin
            out_samp <= {8'(cnt + 8'd2), 8'(cnt + 8'd3), cnt, 8'(cnt + 8'd1)};   // {B, A}
          end
          cnt   <= cnt + 8'd4;
          phase <= phase + phase_inc;
          idx   <= idx + 1'b1;
          if (idx == FFT_LOG2N'(FFT_N - 1)) seq <= seq + 3'd1;
        end
      end
    end
  end

endmodule
