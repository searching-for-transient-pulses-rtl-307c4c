// tb_outer_node: one outer node with an S25 model (counter pattern), a
// LocalLink sink with random ready pauses on both links and a UART control
// PC (CLKS_PER_BIT shortened to 8).  Checked:
//   raw mode (reset default): both links carry one word per sample pair,
//     vstart every 1024 words, A.re field stepping by 2 (counter / 2);
//   S25 pattern checker: words counted, no word errors;
//   internal test generator (counter mode) through the same checker;
//   link test: payload counting by one on both links;
//   FFT mode with bins 0-31 enabled: 32 x 4 words per vector on each link;
//   STATUS: S25 decoder locked, no overflow.
module tb_outer_node;
  import eta_pkg::*;
  localparam int CPB = 8;
  logic clk = 0, rst = 1, s25_clk = 0, s25_rst = 1;
  always #24 clk = ~clk;
  always #25 s25_clk = ~s25_clk;
  logic [3:0] s25_data; logic s25_cnt;
  logic [1:0] tx_src_rdy, tx_dst_rdy = '0, channel_up = '1;
  word_t [1:0] tx_d;
  logic [0:0] uart_rxd = '1, uart_txd;
  int frame;
  s25_model #(.START(0)) u_s25 (.clk(s25_clk), .rst(s25_rst), .pattern(0), .tone_bin(0),
    .phase_b(0), .amp(0), .corrupt_frame(-1), .drop_mark(-1), .data(s25_data), .cnt(s25_cnt), .frame);
  outer_node #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst, .s25_clk, .s25_rst, .s25_data, .s25_cnt,
    .tx_src_rdy, .tx_d, .tx_dst_rdy, .channel_up, .uart_rxd(uart_rxd[0]), .uart_txd(uart_txd[0]));
  always @(negedge clk) tx_dst_rdy = {1'($urandom % 8 != 0), 1'($urandom % 8 != 0)};

  // ---------------- UART control PC ----------------
  task automatic send_byte(int n, logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); uart_rxd[n] = f[i];
      repeat (CPB - 1) @(negedge clk);
    end
  endtask
  task automatic recv_byte(int n, output logic [7:0] b);
    @(negedge uart_txd[n]);
    repeat (CPB / 2) @(negedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(negedge clk); b[i] = uart_txd[n]; end
    repeat (CPB) @(negedge clk);
  endtask
  task automatic write_reg(int n, logic [15:0] a, logic [31:0] d);
    send_byte(n, "W"); send_byte(n, a[15:8]); send_byte(n, a[7:0]);
    for (int i = 3; i >= 0; i--) send_byte(n, d[8*i +: 8]);
  endtask
  task automatic read_reg(int n, logic [15:0] a, output logic [31:0] d);
    logic [7:0] b;
    fork
      begin send_byte(n, "R"); send_byte(n, a[15:8]); send_byte(n, a[7:0]); end
      for (int i = 3; i >= 0; i--) begin recv_byte(n, b); d[8*i +: 8] = b; end
    join
  endtask
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // link monitors: words since the last vstart, raw and link-test continuity
  mode_t  mon_mode = MODE_RAW;
  int     since [2], vlen [2], nvs [2], bad [2];
  word_t  prev [2];
  bit     have [2];
  for (genvar l = 0; l < 2; l++) begin : g_mon
    always @(posedge clk) if (!rst && tx_src_rdy[l] && tx_dst_rdy[l]) begin
      if (tx_d[l].flag.vstart) begin vlen[l] = since[l]; since[l] = 0; nvs[l]++; end
      since[l]++;
      if (have[l]) begin
        if (mon_mode == MODE_RAW && tx_d[l].payload[27:21] != 7'(prev[l].payload[27:21] + 2)) bad[l]++;
        if (mon_mode == MODE_LINKTEST && tx_d[l].payload != prev[l].payload + 1) begin
          bad[l]++; if (bad[l] < 4) $display("lt %0d %h after %h", l, tx_d[l], prev[l]);
        end
      end
      prev[l] = tx_d[l]; have[l] = 1;
    end
  end
  task automatic restart_mon(mode_t m);
    mon_mode = m;
    for (int l = 0; l < 2; l++) begin have[l] = 0; bad[l] = 0; nvs[l] = 0; vlen[l] = 0; end
  endtask

  initial begin
    logic [31:0] d;
    repeat (10) @(negedge clk); s25_rst = 0; rst = 0;
    repeat (20000) @(negedge clk);
    for (int l = 0; l < 2; l++)
      check(nvs[l] >= 1 && vlen[l] == 1024 && bad[l] == 0,
            $sformatf("raw link %0d: vstarts %0d length %0d bad %0d", l, nvs[l], vlen[l], bad[l]));
    read_reg(0, REG_STATUS, d);
    check(d[0] && d[5:1] == 0, $sformatf("status %h", d));
    write_reg(0, REG_MODE, 32'h10);            // raw + S25 pattern check
    repeat (10000) @(negedge clk);
    read_reg(0, 16'h0011, d); check(d > 1000, $sformatf("checked words %0d", d));
    read_reg(0, 16'h0012, d); check(d == 0, $sformatf("S25 word errors %0d", d));
    write_reg(0, REG_MODE, 32'h24);            // test generator
    write_reg(0, REG_MODE, 32'h34);            // test generator + check
    repeat (10000) @(negedge clk);
    read_reg(0, 16'h0011, d); check(d > 1000, $sformatf("test words %0d", d));
    read_reg(0, 16'h0012, d); check(d == 0, $sformatf("test word errors %0d", d));
    write_reg(0, REG_MODE, 32'(MODE_LINKTEST));
    repeat (1000) @(negedge clk);
    restart_mon(MODE_LINKTEST);
    repeat (10000) @(negedge clk);
    for (int l = 0; l < 2; l++) check(have[l] && bad[l] == 0, $sformatf("link test link %0d bad %0d", l, bad[l]));
    for (int w = 0; w < 32; w++) write_reg(0, REG_BINMASK + 16'(w), w == 0 ? 32'hffff_ffff : 32'h0);
    write_reg(0, REG_MODE, 32'(MODE_FFT));
    restart_mon(MODE_FFT);
    repeat (40000) @(negedge clk);
    for (int l = 0; l < 2; l++)
      check(nvs[l] >= 3 && vlen[l] == 128, $sformatf("FFT link %0d: vstarts %0d length %0d", l, nvs[l], vlen[l]));
    read_reg(0, REG_STATUS, d);
    check(d[0] && d[5:1] == 0, $sformatf("final status %h", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
