// tb_inner_combine: random six-input word groups in raw, beam and FFT modes
// with random input-enable masks and shifts.  A reference model in the
// testbench (its own round-half-to-even and saturation) predicts every A and
// B output word: raw selection of two inputs, 7-bit beam pairs packed two
// per word, and 14-bit FFT beams alternating between A and B.
module tb_inner_combine;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  mode_t mode = MODE_RAW; logic [4:0] shift = '0; logic [2:0] raw_a = '0, raw_b = '0;
  logic [5:0] en_mask = '1; logic in_valid = 0; word_t [5:0] in_word = '0;
  logic a_valid, b_valid; word_t a_word, b_word;
  inner_combine dut (.*);
  word_t qa [$], qb [$];
  int checks = 0, failures = 0;

  function automatic longint rsat(longint v, int sh, int w);
    longint q = v, rem, half, lim = (longint'(1) << (w - 1)) - 1;
    if (sh > 0) begin
      q = v >>> sh; rem = v - (q <<< sh); half = longint'(1) << (sh - 1);
      if (rem > half || (rem == half && q[0])) q++;
    end
    if (q > lim) q = lim;
    if (q < -lim - 1) q = -lim - 1;
    return q;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (a_valid) begin checks++; if (qa.size() == 0 || a_word != qa.pop_front()) begin failures++; if (failures < 5) $display("A %h", a_word); end end
    if (b_valid) begin checks++; if (qb.size() == 0 || b_word != qb.pop_front()) begin failures++; if (failures < 5) $display("B %h", b_word); end end
  end

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int v = 0; v < 300; v++) begin
      mode_t m; flag_t hf; logic [13:0] hs;
      m = mode_t'(v % 3); 
      @(negedge clk);
      mode = m; shift = 5'($urandom % 6); raw_a = 3'($urandom % 6); raw_b = 3'($urandom % 6);
      en_mask = 6'($urandom); if (en_mask == 0) en_mask = 6'b1;
      for (int k = 0; k < 8; k++) begin
        longint sre, sim, r7re, r7im, r14re, r14im; flag_t fl; bit gf;
        @(negedge clk);
        in_valid = 1;
        for (int i = 0; i < 6; i++) begin
          in_word[i].flag.vstart = (k == 0); in_word[i].flag.seq = 3'(v);
          in_word[i].payload = 28'($urandom);
        end
        sre = 0; sim = 0; gf = 0; fl = '0;
        for (int i = 0; i < 6; i++) if (en_mask[i]) begin
          sre += longint'($signed(in_word[i].payload[27:14]));
          sim += longint'($signed(in_word[i].payload[13:0]));
          if (!gf) begin fl = in_word[i].flag; gf = 1; end
        end
        r7re = rsat(sre, shift, 7); r7im = rsat(sim, shift, 7);
        r14re = rsat(sre, shift, 14); r14im = rsat(sim, shift, 14);
        case (m)
          MODE_RAW: begin qa.push_back(in_word[raw_a]); qb.push_back(in_word[raw_b]); end
          MODE_BEAM:
            if (k % 2 == 0) begin hf = fl; hs = {7'(r7re), 7'(r7im)}; end
            else if (k % 4 == 1) qa.push_back('{flag: hf, payload: {hs, 7'(r7re), 7'(r7im)}});
            else                 qb.push_back('{flag: hf, payload: {hs, 7'(r7re), 7'(r7im)}});
          default:
            if (k % 2 == 0) qa.push_back('{flag: fl, payload: {14'(r14re), 14'(r14im)}});
            else            qb.push_back('{flag: fl, payload: {14'(r14re), 14'(r14im)}});
        endcase
        @(negedge clk); in_valid = 0;
      end
    end
    repeat (10) @(negedge clk);
    checks++; if (qa.size() != 0 || qb.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
