// tb_fft1024: checks fft1024 against a direct DFT computed in the testbench
// with real arithmetic.  Three 1024-sample bursts (random data, a single tone,
// an impulse) are sent 2048 cycles apart; every output bin must lie within 4
// LSB of the rounded reference, bins must leave in natural order, and the
// first bin must appear the documented 2058 cycles after the burst starts.
module tb_fft1024;
  import eta_pkg::*;
  logic clk = 0, rst = 1;
  always #8 clk = ~clk;

  logic in_valid = 0, in_sync = 0;
  samp_t in_data = '0;
  logic [2:0] in_tag = '0;
  logic out_valid, out_sync;
  logic [FFT_LOG2N-1:0] out_bin;
  fftw_t out_data;
  logic [2:0] out_tag;

  fft1024 dut (.*);

  int checks = 0, failures = 0;
  int xr [3][FFT_N], xi [3][FFT_N];
  real er [3][FFT_N], ei [3][FFT_N];
  longint cyc = 0, t_sync [3], t_out [3];
  int blk_out = 0, bin_seen = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic ref_dft(input int b);
    for (int kk = 0; kk < FFT_N; kk++) begin
      real sr, si;
      sr = 0; si = 0;
      for (int n = 0; n < FFT_N; n++) begin
        real a;
        a = -2.0 * 3.141592653589793 * ((n * kk) % FFT_N) / FFT_N;
        sr += xr[b][n] * $cos(a) - xi[b][n] * $sin(a);
        si += xr[b][n] * $sin(a) + xi[b][n] * $cos(a);
      end
      er[b][kk] = sr; ei[b][kk] = si;
    end
  endtask

  // output monitor
  always @(posedge clk) if (out_valid) begin
    real dr, di;
    if (out_sync) begin
      t_out[blk_out] = cyc;
      checks++;
      if (out_tag != 3'(blk_out + 1)) begin failures++; $display("tag mismatch %0d", out_tag); end
      bin_seen = 0;
    end
    checks++;
    if (out_bin != FFT_LOG2N'(bin_seen)) begin failures++; $display("bin order %0d %0d", out_bin, bin_seen); end
    dr = $itor(out_data.re) - er[blk_out][out_bin];
    di = $itor(out_data.im) - ei[blk_out][out_bin];
    checks++;
    if (dr > 4.0 || dr < -4.0 || di > 4.0 || di < -4.0) begin
      failures++;
      if (failures < 10 || (failures % 50 == 0)) $display("blk %0d bin %0d got %0d,%0d exp %f,%f", blk_out, out_bin,
                                  $signed(out_data.re), $signed(out_data.im), er[blk_out][out_bin], ei[blk_out][out_bin]);
    end
    bin_seen++;
    if (bin_seen == FFT_N) blk_out++;
  end

  initial begin
    for (int n = 0; n < FFT_N; n++) begin
      xr[0][n] = int'($urandom_range(255)) - 128; xi[0][n] = int'($urandom_range(255)) - 128;
      xr[1][n] = $rtoi($floor(100.0 * $cos(2.0 * 3.141592653589793 * 37 * n / FFT_N) + 0.5));
      xi[1][n] = $rtoi($floor(100.0 * $sin(2.0 * 3.141592653589793 * 37 * n / FFT_N) + 0.5));
      xr[2][n] = (n == 5) ? 127 : 0;  xi[2][n] = (n == 5) ? -128 : 0;
    end
    for (int b = 0; b < 3; b++) ref_dft(b);
    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int b = 0; b < 3; b++) begin
      for (int n = 0; n < 2048; n++) begin
        in_valid <= (n < FFT_N);
        in_sync  <= (n == 0);
        in_tag   <= 3'(b + 1);
        if (n < FFT_N) begin
          in_data.re <= 8'(xr[b][n]); in_data.im <= 8'(xi[b][n]);
        end
        @(posedge clk);
        if (n == 0) t_sync[b] = cyc;
      end
    end
    in_valid <= 0;
    repeat (2200) @(posedge clk);
    checks++;
    if (blk_out != 3) begin failures++; $display("blocks out %0d", blk_out); end
    for (int b = 0; b < 3 && b < blk_out; b++) begin
      checks++;
      if (t_out[b] - t_sync[b] != 2058) begin
        failures++; $display("latency %0d", t_out[b] - t_sync[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
