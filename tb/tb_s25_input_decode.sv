// tb_s25_input_decode: drives the decoder from the S25 model (60 MHz, counter
// pattern) while the node clock runs at 62.5 MHz.  Checks that it locks on the
// first vector mark, that every sample pair, index and vector number matches
// the model, that one corrupted frame is received as corrupted data only, and
// that a missing mark is counted as exactly one sync error.  The sample rate
// is checked too: 2048 pairs must arrive in 2048 frames (16384 S25 clocks).
module tb_s25_input_decode;
  import eta_pkg::*;
  logic clk = 0, s25_clk = 0, rst = 1, s25_rst = 1;
  always #24 clk = ~clk;        // 62.5 MHz (units of 1/3 ns)
  always #25 s25_clk = ~s25_clk; // 60 MHz

  logic [3:0] s25_data; logic s25_cnt; int frame;
  s25_model #(.START(1000)) m (.clk(s25_clk), .rst(s25_rst), .pattern(0), .tone_bin(0), .phase_b(0), .amp(0),
                 .corrupt_frame(1500), .drop_mark(2), .data(s25_data), .cnt(s25_cnt), .frame(frame));

  logic out_valid, sync_err, locked, overflow;
  samp_t [N_ANT-1:0] out_samp; logic [FFT_LOG2N-1:0] out_idx; logic [2:0] out_seq;
  s25_input_decode dut (.*);

  int n0, checks = 0, failures = 0, nrx = 0, nerr = 0, exp_n = 1024;
  always @(posedge clk) begin
    if (sync_err && !rst) begin nerr++; $display("sync_err at sample %0d", exp_n); end
    if (out_valid) begin
      logic [31:0] e; logic [7:0] c;
      c = 8'(4 * exp_n);
      e = {8'(c + 2), 8'(c + 3), c, 8'(c + 1)};
      if (exp_n == 1500) e[12] = ~e[12];
      checks++;
      if (out_samp != e || out_idx != FFT_LOG2N'(exp_n % 1024) || out_seq != 3'((exp_n / 1024) - 1)) begin
        failures++;
        if (failures < 5) $display("n=%0d got %h idx %0d seq %0d exp %h", exp_n, out_samp, out_idx, out_seq, e);
      end
      exp_n++; nrx++;
    end
  end

  initial begin
    repeat (5) @(posedge s25_clk);
    s25_rst <= 0; rst <= 0;
    wait (frame == 2048);
    n0 = nrx;
    checks++; if (!locked) begin failures++; $display("not locked"); end
    wait (frame == 3072);
    checks++; if (nrx - n0 != 1024) begin failures++; $display("rate: %0d pairs in 1024 frames", nrx - n0); end
    wait (frame == 1024 * 3 + 600);
    repeat (40) @(posedge clk);
    checks++; if (nerr != 1) begin failures++; $display("sync errors %0d", nerr); end
    checks++; if (overflow) begin failures++; $display("overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
