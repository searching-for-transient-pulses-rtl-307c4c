// tb_cmult: random and extreme operands streamed one per clock; each product
// must equal the exact complex product computed in the testbench and appear
// exactly 3 cycles after its operands.
module tb_cmult;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic in_valid = 0; coef_t a = '0; fftw_t b = '0; logic out_valid; prod_t p;
  cmult dut (.*);
  int checks = 0, failures = 0, sent = 0, got = 0;
  longint er [4096], ei [4096]; int ts [4096]; int cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (out_valid && !rst) begin
    checks++;
    if (longint'(p.re) != er[got] || longint'(p.im) != ei[got] || cyc - ts[got] != 3) begin
      failures++; if (failures < 5) $display("k %0d got %0d %0d exp %0d %0d lat %0d", got, p.re, p.im, er[got], ei[got], cyc - ts[got]);
    end
    got++;
  end
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      in_valid = (k % 5 != 4);
      if (k < 8) begin
        a.re = (k[0]) ? -16'sd32768 : 16'sd32767; a.im = (k[1]) ? -16'sd32768 : 16'sd32767;
        b.re = (k[2]) ? -18'sd131072 : 18'sd131071; b.im = -18'sd131072;
      end else begin
        a = coef_t'($urandom); b = fftw_t'({$urandom, $urandom});
      end
      if (in_valid) begin
        er[sent] = longint'(a.re) * longint'(b.re) - longint'(a.im) * longint'(b.im);
        ei[sent] = longint'(a.re) * longint'(b.im) + longint'(a.im) * longint'(b.re);
        ts[sent] = cyc; sent++;
      end
    end
    @(negedge clk); in_valid = 0; repeat (6) @(negedge clk);
    checks++; if (got != sent) begin failures++; $display("count %0d %0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
