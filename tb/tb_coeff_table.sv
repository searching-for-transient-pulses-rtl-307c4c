// tb_coeff_table: writes 1024 random coefficients through the control port,
// then reads every address back on both ports in random order and checks the
// one-cycle read latency of each port against a testbench copy.
module tb_coeff_table;
  import eta_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic [9:0] a_addr = '0, b_addr = '0; logic b_we = 0; coef_t b_wdata = '0, a_data, b_rdata;
  coeff_table dut (.*);
  coef_t ref_m [1024];
  int checks = 0, failures = 0;
  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); b_addr = 10'(i); b_we = 1; b_wdata = coef_t'($urandom); ref_m[i] = b_wdata;
    end
    @(negedge clk); b_we = 0;
    for (int k = 0; k < 3000; k++) begin
      logic [9:0] x, y;
      x = 10'($urandom); y = 10'($urandom);
      @(negedge clk); a_addr = x; b_addr = y;
      @(negedge clk);
      checks += 2;
      if (a_data != ref_m[x]) begin failures++; $display("a %0d", x); end
      if (b_rdata != ref_m[y]) begin failures++; $display("b %0d", y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
