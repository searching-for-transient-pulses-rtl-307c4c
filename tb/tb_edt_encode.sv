// tb_edt_encode: words for recording streams A and B arrive at random times;
// the 16-bit EDT output must alternate A, B, A, B..., each 32-bit word sent
// upper half first.  An input burst beyond the buffer depth must set the
// overflow flag (checked with a small DEPTH).
module tb_edt_encode;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic a_valid = 0, b_valid = 0, ready, edt_valid, overflow;
  word_t a_word = '0, b_word = '0;
  logic [15:0] edt_data;
  edt_encode #(.DEPTH(64)) dut (.*);
  logic [15:0] qa [$], qb [$];
  int checks = 0, failures = 0, nout = 0;
  always @(posedge clk) if (!rst && edt_valid) begin
    logic [15:0] e;
    checks++;
    if ((nout / 2) % 2 == 0) e = (qa.size() != 0) ? qa.pop_front() : 16'hxxxx;
    else                     e = (qb.size() != 0) ? qb.pop_front() : 16'hxxxx;
    if (edt_data != e) begin failures++; if (failures < 5) $display("out %0d %h exp %h", nout, edt_data, e); end
    nout++;
  end
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      a_valid = ready && ($urandom % 5 == 0);
      b_valid = ready && ($urandom % 5 == 0);
      a_word = word_t'($urandom); b_word = word_t'($urandom);
      if (a_valid) begin qa.push_back(a_word[31:16]); qa.push_back(a_word[15:0]); end
      if (b_valid) begin qb.push_back(b_word[31:16]); qb.push_back(b_word[15:0]); end
    end
    @(negedge clk); a_valid = 0; b_valid = 0;
    // release any unmatched A words by completing B
    while (qb.size() < qa.size()) begin
      @(negedge clk); b_valid = 1; b_word = word_t'($urandom);
      qb.push_back(b_word[31:16]); qb.push_back(b_word[15:0]);
    end
    while (qa.size() < qb.size()) begin
      @(negedge clk); b_valid = 0; a_valid = 1; a_word = word_t'($urandom);
      qa.push_back(a_word[31:16]); qa.push_back(a_word[15:0]);
    end
    @(negedge clk); a_valid = 0; b_valid = 0;
    repeat (500) @(negedge clk);
    checks += 2;
    if (qa.size() != 0 || qb.size() != 0) begin failures++; $display("left %0d %0d", qa.size(), qb.size()); end
    if (overflow) begin failures++; $display("spurious overflow"); end
    repeat (200) begin @(negedge clk); a_valid = 1; end
    @(negedge clk); a_valid = 0; @(negedge clk);
    checks++; if (!overflow) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (60000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
