// tb_beam_bank: all eight coefficient tables are loaded with random values
// through the control port (and read back), then random FFT-output pairs are
// streamed in basic-beamforming mode (coefficient 0 of each table) and in FFT
// mode (coefficient per bin).  Each of the four beams must equal the complex
// weighted sum over both antennas, rounded half-to-even after the shift and
// saturated to 14 bits, and must come out with its tag.
module tb_beam_bank;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic fft_mode = 0, in_valid = 0, out_valid, ctl_we = 0;
  logic [4:0] shift = '0;
  fftw_t [1:0] in_x = '0; logic [9:0] in_addr = '0, ctl_addr = '0;
  logic [13:0] in_tag = '0, out_tag; logic [3:0][27:0] out_beam;
  logic [2:0] ctl_table = '0; coef_t ctl_wdata = '0, ctl_rdata;
  beam_bank dut (.*);
  coef_t cm [8][1024];
  logic [3:0][27:0] expq [logic [13:0]];
  int checks = 0, failures = 0, nout = 0;

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

  always @(posedge clk) if (!rst && out_valid) begin
    checks++; nout++;
    if (!expq.exists(out_tag) || expq[out_tag] != out_beam) begin
      failures++; if (failures < 5) $display("tag %h got %h exp %h prev %h next %h", out_tag, out_beam, expq[out_tag], expq[out_tag-1], expq[out_tag+1]);
    end
    expq.delete(out_tag);
  end

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int t = 0; t < 8; t++)
      for (int a = 0; a < 1024; a++) begin
        @(negedge clk); ctl_we = 1; ctl_table = 3'(t); ctl_addr = 10'(a);
        ctl_wdata = coef_t'($urandom); cm[t][a] = ctl_wdata;
      end
    @(negedge clk); ctl_we = 0;
    for (int k = 0; k < 200; k++) begin
      int t, a;
      t = $urandom % 8; a = $urandom % 1024;
      @(negedge clk); ctl_table = 3'(t); ctl_addr = 10'(a);
      @(negedge clk); @(negedge clk);
      checks++; if (ctl_rdata != cm[t][a]) begin failures++; $display("readback %0d %0d", t, a); end
    end
    for (int k = 0; k < 6000; k++) begin
      logic [3:0][27:0] e; int ca;
      @(negedge clk);
      if (k % 1000 == 0) begin fft_mode = (k / 1000) % 2; shift = 5'(k / 1000 + 19); end
      in_valid = ($urandom % 4) != 0;
      in_x = {18'($urandom), 18'($urandom), 18'($urandom), 18'($urandom)};
      in_addr = 10'($urandom); in_tag = 14'(k);
      ca = fft_mode ? in_addr : 0;
      for (int b = 0; b < 4; b++) begin
        longint re, im;
        re = 0; im = 0;
        for (int a = 0; a < 2; a++) begin
          coef_t c; c = cm[2*b + a][ca];
          re += longint'(c.re) * longint'(in_x[a].re) - longint'(c.im) * longint'(in_x[a].im);
          im += longint'(c.re) * longint'(in_x[a].im) + longint'(c.im) * longint'(in_x[a].re);
        end
        e[b] = {14'(rsat(re, shift, 14)), 14'(rsat(im, shift, 14))};
      end
      if (in_valid) expq[in_tag] = e;
      if (k % 1000 == 999) begin @(negedge clk); in_valid = 0; repeat (10) @(negedge clk); end
    end
    @(negedge clk); in_valid = 0; repeat (10) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (40000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
