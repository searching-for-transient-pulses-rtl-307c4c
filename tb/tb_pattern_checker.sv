// tb_pattern_checker: feeds 1000 counter words (byte lanes +4) with three
// injected errors (1, 2 and 3 flipped lane sign bits, which the next word's
// comparison sees again as the same bits) and checks the tallies: 999 words
// checked, 6 erroneous words (each error also breaks the next comparison) and
// 12 erroneous bits; then re-enabling must clear the counters.
module tb_pattern_checker;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic enable = 0, in_valid = 0; logic [31:0] in_data = '0;
  logic [31:0] words, word_errors, bit_errors;
  pattern_checker #(.W(32), .LANE_W(8), .INC(4)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (3) @(posedge clk); rst <= 0; enable <= 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 1000; n++) begin
      logic [7:0] c; logic [31:0] w;
      c = 8'(4 * n + 7); w = {c, 8'(c + 1), 8'(c + 2), 8'(c + 3)};
      if (n == 100) w ^= 32'h80;
      if (n == 500) w ^= 32'h8000_0100;
      if (n == 900) w ^= 32'h0080_8080;
      @(negedge clk);
      in_valid = 1; in_data = w;
      if (n % 3 == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0; @(posedge clk); @(posedge clk);
    checks++; if (words != 999) begin failures++; $display("words %0d", words); end
    checks++; if (word_errors != 6) begin failures++; $display("werr %0d", word_errors); end
    checks++; if (bit_errors != 12) begin failures++; $display("berr %0d", bit_errors); end
    enable <= 0; @(posedge clk); enable <= 1; @(posedge clk); @(posedge clk);
    checks++; if (words != 0 || bit_errors != 0) begin failures++; $display("no clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
