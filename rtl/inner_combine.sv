// inner_combine: the "Combine Signals" block of an inner node (its Raw and
// Beams paths and the mode multiplexer).  It turns each aligned set of words
// from inner_sync into the two 32-bit streams A and B that go to the recording
// PC.
//   MODE_RAW, MODE_LINKTEST: the words of two selected inputs (`raw_a`,
//     `raw_b`) pass unchanged to A and B; in raw mode each already holds two
//     complex 14-bit antenna samples.
//   MODE_BEAM: the 14-bit partial beams of all enabled inputs are summed (the
//     last three levels of the 4-level adder tree), shifted right by `shift`,
//     rounded to nearest with ties to even (no DC bias) and saturated to 7-bit
//     I and Q.  Beams arrive in the order 1,2,3,4 per element; beams 1 and 2
//     share one word on A, beams 3 and 4 one word on B.
//   MODE_FFT: the same sum is rounded to 14-bit I and Q, one beam per word;
//     beams 1 and 3 go to A, 2 and 4 to B, so alternating A and B restores
//     beam order.
// The paper gives summing, shifting and rounding, the 32-bit word of a 4-bit
// flag plus one or two complex 14-bit samples, and two multiplexed streams;
// the assignment of beams to words and streams is this design's.  A word takes
// the flag of the first beam it carries.  Output is registered (one cycle).
module inner_combine
  import eta_pkg::*;
#(
  parameter int unsigned N = N_INNER_IN
) (
  input  logic           clk,
  input  logic           rst,
  input  mode_t          mode,
  input  logic [4:0]     shift,
  input  logic [2:0]     raw_a,
  input  logic [2:0]     raw_b,
  input  logic [N-1:0]   en_mask,
  input  logic           in_valid,
  input  word_t [N-1:0]  in_word,
  output logic           a_valid,
  output word_t          a_word,
  output logic           b_valid,
  output word_t          b_word
);
  logic signed [PART_W+3:0] sre, sim;
  flag_t      fl;
  logic       got_fl;
  logic [1:0] bidx, bcur;
  flag_t      hold_fl;
  logic [2*REC_W-1:0] hold_s;
  logic [REC_W-1:0]   r7re, r7im;
  logic [PART_W-1:0]  r14re, r14im;

  always_comb begin
    sre = '0; sim = '0; fl = '0; got_fl = 1'b0;
    for (int i = 0; i < N; i++) if (en_mask[i]) begin
      sre = sre + (PART_W+4)'($signed(in_word[i].payload[2*PART_W-1:PART_W]));
      sim = sim + (PART_W+4)'($signed(in_word[i].payload[PART_W-1:0]));
      if (!got_fl) begin fl = in_word[i].flag; got_fl = 1'b1; end
    end
    r7re  = REC_W'(round_sat(48'(sre), shift, REC_W));
    r7im  = REC_W'(round_sat(48'(sim), shift, REC_W));
    r14re = PART_W'(round_sat(48'(sre), shift, PART_W));
    r14im = PART_W'(round_sat(48'(sim), shift, PART_W));
    bcur  = fl.vstart ? 2'd0 : bidx;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a_valid <= 1'b0; b_valid <= 1'b0; a_word <= '0; b_word <= '0;
      bidx <= '0; hold_fl <= '0; hold_s <= '0;
    end else begin
      a_valid <= 1'b0;
      b_valid <= 1'b0;
      if (in_valid) begin
        bidx <= bcur + 2'd1;
        unique case (mode)
          MODE_BEAM: begin
            if (!bcur[0]) begin
              hold_fl <= fl; hold_s <= {r7re, r7im};
            end else if (!bcur[1]) begin
              a_valid <= 1'b1; a_word <= '{flag: hold_fl, payload: {hold_s, r7re, r7im}};
            end else begin
              b_valid <= 1'b1; b_word <= '{flag: hold_fl, payload: {hold_s, r7re, r7im}};
            end
          end
          MODE_FFT: begin
            if (!bcur[0]) begin a_valid <= 1'b1; a_word <= '{flag: fl, payload: {r14re, r14im}}; end
            else          begin b_valid <= 1'b1; b_word <= '{flag: fl, payload: {r14re, r14im}}; end
          end
          default: begin   // RAW, LINKTEST
            a_valid <= 1'b1; a_word <= in_word[raw_a];
            b_valid <= 1'b1; b_word <= in_word[raw_b];
          end
        endcase
      end
    end
  end
endmodule
