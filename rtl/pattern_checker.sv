// pattern_checker: verifies counter test data after a link and tallies errors,
// as every ML310 does for the bit-error-rate tests.
//
// The data word is split into lanes of LANE_W bits; in a correct stream each
// lane of a word equals the same lane of the previous word plus INC (modulo
// 2^LANE_W).  The first word after `enable` rises only seeds the check.  Each
// later word adds the number of differing bits to `bit_errors` and, if any
// differ, one to `word_errors`; `words` counts checked words.  The expected
// value is always derived from the word actually received, so one corrupted
// word is counted twice (the bad word and the one after it), as a simple
// continuity check does.  Counters saturate and clear when `enable` rises.
// The paper says errors are tallied on each node; the lane/increment rule is
// this design's choice, matched to test_input_gen and to the outer node's
// link-test words.
module pattern_checker #(
  parameter int unsigned W      = 32,
  parameter int unsigned LANE_W = 8,
  parameter int unsigned INC    = 4
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          enable,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  output logic [31:0]   words,
  output logic [31:0]   word_errors,
  output logic [31:0]   bit_errors
);
  localparam int unsigned NL = W / LANE_W;
  logic [W-1:0] prev, expv, diff;
  logic         seeded, en_d;
  logic [$clog2(W+1)-1:0] nbits;

  always_comb begin
    for (int l = 0; l < NL; l++)
      expv[l*LANE_W +: LANE_W] = prev[l*LANE_W +: LANE_W] + LANE_W'(INC);
    diff  = expv ^ in_data;
    nbits = '0;
    for (int b = 0; b < W; b++) nbits = nbits + $bits(nbits)'(diff[b]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev <= '0; seeded <= 1'b0; en_d <= 1'b0;
      words <= '0; word_errors <= '0; bit_errors <= '0;
    end else begin
      en_d <= enable;
      if (enable && !en_d) begin
        seeded <= 1'b0; words <= '0; word_errors <= '0; bit_errors <= '0;
      end else if (enable && in_valid) begin
        prev   <= in_data;
        seeded <= 1'b1;
        if (seeded) begin
          if (words != '1) words <= words + 1;
          if (nbits != 0 && word_errors != '1) word_errors <= word_errors + 1;
          if (bit_errors <= 32'hFFFF_FFFF - 32'(nbits)) bit_errors <= bit_errors + 32'(nbits);
          else bit_errors <= '1;
        end
      end
    end
  end
endmodule
