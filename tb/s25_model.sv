// s25_model: behavioural model of the LVDS output of an S25 receiver node, as
// the RTL's s25_input_decode expects it.  Not synthesizable design; used by the
// testbenches only.
//
// Every frame of 8 clocks carries one sample pair n (antennas A and B, 8-bit
// I/Q each) as nibbles A.re[7:4], A.re[3:0], A.im[7:4], A.im[3:0], B...; the
// counter bit is high on the first nibble of frame n when n mod 1024 == 0.
// Sample n is, per `pattern`:
//   0: counter bytes {A.re, A.im, B.re, B.im} = {4n, 4n+1, 4n+2, 4n+3} mod 256
//   1: tone_a / tone_b: A = round(amp*exp(j*2*pi*n*k/1024)), B = same with an
//      extra phase of `phase_b` (in 1/1024 turns), k = `tone_bin`.
// `corrupt_frame` (>= 0) flips data bit 0 of that frame's first nibble;
// `drop_mark` suppresses the counter mark of vector `drop_mark`.
module s25_model #(
  parameter int START = 0
) (
  input  logic       clk,
  input  logic       rst,
  input  int         pattern,
  input  int         tone_bin,
  input  int         phase_b,
  input  int         amp,
  input  int         corrupt_frame,
  input  int         drop_mark,
  output logic [3:0] data,
  output logic       cnt,
  output int         frame
);
  int slot;
  logic [31:0] cur;

  function automatic logic [31:0] samp(input int n);
    logic [7:0] c;
    real a, b;
    if (pattern == 0) begin
      c = 8'(4 * n);
      return {c, 8'(c + 1), 8'(c + 2), 8'(c + 3)};
    end
    a = 2.0 * 3.141592653589793 * ((n * tone_bin) % 1024) / 1024.0;
    b = a + 2.0 * 3.141592653589793 * phase_b / 1024.0;
    return {8'($rtoi($floor(amp * $cos(a) + 0.5))), 8'($rtoi($floor(amp * $sin(a) + 0.5))),
            8'($rtoi($floor(amp * $cos(b) + 0.5))), 8'($rtoi($floor(amp * $sin(b) + 0.5)))};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      slot <= 0; frame <= START; data <= '0; cnt <= 1'b0;
    end else begin
      logic [31:0] w;
      w = samp(frame);
      data <= w[31 - 4*slot -: 4] ^ ((frame == corrupt_frame && slot == 0) ? 4'h1 : 4'h0);
      cnt  <= (slot == 0) && (frame % 1024 == 0) && (frame / 1024 != drop_mark);
      if (slot == 7) begin slot <= 0; frame <= frame + 1; end
      else slot <= slot + 1;
    end
  end
endmodule
