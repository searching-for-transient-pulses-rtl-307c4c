// tb_fft_input_buffer: three vectors of 1024 random dual-antenna samples are
// fed at one sample per 8 clocks (about the S25 rate).  Each vector must come
// out as one unbroken 1024-cycle burst, first sample marked by out_sync,
// samples in order and tagged with the vector number, and with no overrun.
module tb_fft_input_buffer;
  import eta_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic in_valid = 0, out_valid, out_sync, overrun;
  samp_t [N_ANT-1:0] in_samp = '0, out_samp;
  logic [FFT_LOG2N-1:0] in_idx = '0;
  logic [2:0] in_seq = '0, out_tag;
  fft_input_buffer dut (.*);
  samp_t [N_ANT-1:0] mem [3][1024];
  int checks = 0, failures = 0, vec = -1, pos = 0, bursts = 0;
  always @(posedge clk) if (!rst) begin
    if (out_sync) begin vec++; pos = 0; bursts++; end
    if (out_valid) begin
      checks++;
      if (vec < 0 || vec > 2 || out_samp != mem[vec][pos] || out_tag != 3'(vec + 1)) begin
        failures++; if (failures < 5) $display("vec %0d pos %0d", vec, pos);
      end
      pos++;
    end else if (pos != 0 && pos != 1024) begin
      failures++; $display("burst broken at %0d", pos); pos = 1024;
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int v = 0; v < 3; v++)
      for (int i = 0; i < 1024; i++) begin
        @(negedge clk);
        in_valid = 1; in_idx = 10'(i); in_seq = 3'(v + 1);
        in_samp = {8'($urandom), 8'($urandom), 8'($urandom), 8'($urandom)};
        mem[v][i] = in_samp;
        @(negedge clk); in_valid = 0;
        repeat (6) @(negedge clk);
      end
    repeat (3000) @(negedge clk);
    checks += 2;
    if (bursts != 3) begin failures++; $display("bursts %0d", bursts); end
    if (overrun) begin failures++; $display("spurious overrun"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (60000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
