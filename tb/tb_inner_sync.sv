// tb_inner_sync: six inputs carry the same stream of 16-word vectors (vector
// start flag on the first word, 3-bit vector number), each with a different
// link latency and each joining mid-vector.  The block must lock and then
// release groups whose six words are identical and consecutive.  One word is
// then dropped on input 3: a sync error must be reported and the block must
// lock again and resume aligned output.  Input 5 is disabled for the last
// quarter of the run and must never overflow.
module tb_inner_sync;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic [5:0] en_mask = '1, rx_valid = '0, overflow;
  word_t [5:0] rx_word = '0, out_word;
  logic out_ready = 1, out_valid, locked, sync_err;
  inner_sync #(.DEPTH(256)) dut (.*);
  int checks = 0, failures = 0, nerr = 0, ngroups = 0, t = 0;
  logic [27:0] last = '0; bit have_last = 0;
  always @(posedge clk) if (!rst) begin
    if (sync_err) begin nerr++; have_last = 0; end
    if (out_valid) begin
      bit ok;
      ok = 1;
      for (int i = 0; i < 6; i++) if (en_mask[i] && out_word[i] != out_word[0]) ok = 0;
      if (have_last && out_word[0].payload != last + 1) ok = 0;
      checks++; ngroups++;
      if (!ok) begin failures++; if (failures < 5) $display("group %h %h %h", out_word[0], out_word[3], last); end
      last = out_word[0].payload; have_last = 1;
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (t = 0; t < 40000; t++) begin
      @(negedge clk);
      out_ready = ($urandom % 8) != 0;
      en_mask[5] = t < 30000;
      for (int i = 0; i < 6; i++) begin
        int g;
        g = t - 3 * i;
        rx_valid[i] = g >= 0 && g % 4 == 0 && g / 4 >= 5 * i && !(i == 3 && g / 4 == 6000);
        rx_word[i].flag.vstart = (g / 4) % 16 == 0;
        rx_word[i].flag.seq = 3'((g / 4) / 16);
        rx_word[i].payload = 28'(g / 4);
      end
    end
    rx_valid = '0;
    repeat (100) @(negedge clk);
    checks += 4;
    if (nerr != 1) begin failures++; $display("sync errors %0d", nerr); end
    if (!locked) begin failures++; $display("not relocked"); end
    if (ngroups < 9000) begin failures++; $display("groups %0d", ngroups); end
    if (overflow != 0) begin failures++; $display("overflow %b", overflow); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
