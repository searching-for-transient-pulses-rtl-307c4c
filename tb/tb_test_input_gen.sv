// tb_test_input_gen: checks the synthetic data source.  Counter mode: byte
// lanes {c, c+1, c+2, c+3} advancing by 4, indices 0..1023 then wrapping with
// the vector number incremented, and exactly 3 samples per 25 clocks (7.5 MSPS
// at 62.5 MHz).  NCO mode: with a phase step of 1/64 turn, antenna A must equal
// round(127*exp(j*2*pi*n/64)) within 1 LSB and antenna B must be A a quarter
// turn later (phase offset 0x4000).
module tb_test_input_gen;
  import eta_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic enable = 0, nco_mode = 0;
  logic [15:0] phase_inc = 16'd1024, phase_off = 16'h4000;
  logic out_valid; samp_t [N_ANT-1:0] out_samp; logic [FFT_LOG2N-1:0] out_idx; logic [2:0] out_seq;
  test_input_gen dut (.*);
  int checks = 0, failures = 0, n = 0, cyc = 0;

  function automatic int near(input int a, input int b);
    return (a - b <= 1) && (b - a <= 1);
  endfunction

  always @(posedge clk) if (enable) begin
    cyc++;
    if (out_valid) begin
      checks++;
      if (!nco_mode) begin
        logic [7:0] c; c = 8'(4 * n);
        if (out_samp != {8'(c + 2), 8'(c + 3), c, 8'(c + 1)} || out_idx != FFT_LOG2N'(n % 1024)
            || out_seq != 3'(n / 1024)) begin
          failures++; if (failures < 5) $display("cnt n=%0d %h %0d", n, out_samp, out_idx);
        end
      end else begin
        real a; int er, ei;
        a = 2.0 * 3.141592653589793 * n / 64.0;
        er = $rtoi($floor(127.0 * $cos(a) + 0.5)); ei = $rtoi($floor(127.0 * $sin(a) + 0.5));
        if (!near(out_samp[0].re, er) || !near(out_samp[0].im, ei) ||
            !near(out_samp[1].re, $rtoi($floor(127.0 * $cos(a + 1.5707963) + 0.5))) ||
            !near(out_samp[1].im, $rtoi($floor(127.0 * $sin(a + 1.5707963) + 0.5)))) begin
          failures++; if (failures < 5) $display("nco n=%0d %0d %0d / %0d %0d exp %0d %0d", n, out_samp[0].re, out_samp[0].im, out_samp[1].re, out_samp[1].im, er, ei);
        end
      end
      n++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk); enable <= 1;
    repeat (25 * 800) @(posedge clk);       // 2400 samples expected
    @(negedge clk);
    checks++; if (n < 2398 || n > 2400) begin failures++; $display("rate %0d", n); end
    enable <= 0; nco_mode <= 1; n = 0;
    repeat (2) @(posedge clk);
    enable <= 1;
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
