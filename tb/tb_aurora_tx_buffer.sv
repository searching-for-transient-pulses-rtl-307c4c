// tb_aurora_tx_buffer: random pushes (respecting in_ready) against a random
// LocalLink destination-ready pattern.  Every word must leave in order and
// unchanged, with no overflow.  Finally words are pushed while in_ready is
// low and the sticky overflow flag must rise.
module tb_aurora_tx_buffer;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic in_valid = 0, in_ready, tx_src_rdy, tx_dst_rdy = 0, overflow;
  word_t in_word = '0, tx_d;
  aurora_tx_buffer dut (.*);
  word_t q [$];
  int checks = 0, failures = 0, sent = 0;
  always @(posedge clk) if (!rst && tx_src_rdy && tx_dst_rdy) begin
    checks++;
    if (q.size() == 0 || tx_d != q[0]) begin failures++; $display("mismatch %h", tx_d); end
    if (q.size() != 0) void'(q.pop_front());
  end
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      tx_dst_rdy = ($urandom % 4) != 0 && !(k > 5000 && k < 6000);
      in_valid = in_ready && ($urandom % 3 != 0);
      in_word = word_t'($urandom);
      if (in_valid) begin q.push_back(in_word); sent++; end
    end
    @(negedge clk); in_valid = 0; tx_dst_rdy = 1;
    repeat (100) @(negedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("%0d words lost", q.size()); end
    if (overflow) begin failures++; $display("spurious overflow"); end
    tx_dst_rdy = 0;
    repeat (80) begin @(negedge clk); in_valid = 1; in_word = word_t'($urandom); end
    @(negedge clk); in_valid = 0; @(negedge clk);
    checks++; if (!overflow) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
