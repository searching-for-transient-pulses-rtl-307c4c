// tb_eta_backend: end-to-end test of the whole back end (12 outer nodes, 4
// inner nodes).  Twelve S25 models drive the receiver inputs with the counter
// pattern; 24 Aurora channel models (latency plus clock-correction pauses)
// join outer-node link l of node 6h+k to input k of inner node 2h+l; the
// control PC is modelled by UART tasks.  The UART bit time is shortened
// (CLKS_PER_BIT=8) so that configuration does not dominate the run.
//
// Phases: raw mode (reset default) -> link test -> beam mode (with a
// coefficient written and read back) -> FFT mode with a bin mask -> overflow
// (one channel held down).  Each mechanism is counted and the test fails if
// any of them never happened: raw recording, sync lock, link test, beam
// recording, coefficient access, FFT+mask recording, clock-correction stall,
// overflow flag.
module tb_eta_backend;
  import eta_pkg::*;
  localparam int CPB = 8;

  logic clk = 0, rst = 1;
  logic [N_OUTER-1:0] s25_clk = '0;
  logic s25_rst = 1;
  always #24 clk = ~clk;
  always #25 s25_clk = ~s25_clk;

  logic [N_OUTER-1:0][3:0] s25_data;
  logic [N_OUTER-1:0] s25_cnt;
  logic [N_OUTER-1:0][N_LINKS_OUT-1:0] tx_src_rdy, tx_dst_rdy, tx_channel_up;
  word_t [N_OUTER-1:0][N_LINKS_OUT-1:0] tx_d;
  logic [N_INNER-1:0][N_INNER_IN-1:0] rx_src_rdy, rx_channel_up;
  word_t [N_INNER-1:0][N_INNER_IN-1:0] rx_d;
  logic [N_INNER-1:0] edt_valid;
  logic [N_INNER-1:0][15:0] edt_data;
  logic [N_OUTER+N_INNER-1:0] uart_rxd = '1, uart_txd;
  logic [N_OUTER-1:0][N_LINKS_OUT-1:0] down = '0;
  int stalls [N_OUTER][N_LINKS_OUT];

  eta_backend #(.CLKS_PER_BIT(CPB)) dut (
    .clk, .rst, .s25_clk, .s25_rst({N_OUTER{s25_rst}}), .s25_data, .s25_cnt,
    .tx_src_rdy, .tx_d, .tx_dst_rdy, .tx_channel_up, .rx_src_rdy, .rx_d,
    .rx_channel_up, .edt_valid, .edt_data, .uart_rxd, .uart_txd);

  assign tx_channel_up = '1;
  assign rx_channel_up = '1;

  for (genvar n = 0; n < N_OUTER; n++) begin : g_s25
    int frame;
    s25_model #(.START(100 * n)) u_s25 (
      .clk(s25_clk[n]), .rst(s25_rst), .pattern(0), .tone_bin(0), .phase_b(0),
      .amp(0), .corrupt_frame(-1), .drop_mark(-1), .data(s25_data[n]),
      .cnt(s25_cnt[n]), .frame);
    for (genvar l = 0; l < N_LINKS_OUT; l++) begin : g_ch
      aurora_channel_model #(.LAT(8 + n), .CC_PERIOD(2500), .CC_LEN(4)) u_ch (
        .clk, .rst, .down(down[n][l]), .tx_src_rdy(tx_src_rdy[n][l]), .tx_d(tx_d[n][l]),
        .tx_dst_rdy(tx_dst_rdy[n][l]),
        .rx_src_rdy(rx_src_rdy[2*(n/6)+l][n%6]), .rx_d(rx_d[2*(n/6)+l][n%6]),
        .stalls(stalls[n][l]));
    end
  end

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
  // same register write on all outer nodes (or all inner nodes) in parallel
  task automatic write_all(bit inner, logic [15:0] a, logic [31:0] d);
    for (int n = 0; n < (inner ? N_INNER : N_OUTER); n++) begin
      automatic int m = inner ? N_OUTER + n : n;
      fork write_reg(m, a, d); join_none
    end
    wait fork;
  endtask

  // ---------------- monitors ----------------
  int edt_words [N_INNER];
  always @(posedge clk) if (!rst)
    for (int i = 0; i < N_INNER; i++) if (edt_valid[i]) edt_words[i]++;

  int checks = 0, failures = 0;
  int m_raw = 0, m_lock = 0, m_link = 0, m_beam = 0, m_coef = 0, m_fft = 0, m_cc = 0, m_ovf = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int total_edt();
    int s = 0;
    for (int i = 0; i < N_INNER; i++) s += edt_words[i];
    return s;
  endfunction

  initial begin
    logic [31:0] d;
    int w0;
    repeat (10) @(negedge clk); s25_rst = 0; rst = 0;

    // raw mode is the reset default of every node
    repeat (30000) @(negedge clk);
    for (int i = 0; i < N_INNER; i++) begin
      check(edt_words[i] > 1000, $sformatf("raw: inner %0d recorded %0d words", i, edt_words[i]));
      if (edt_words[i] > 1000) m_raw++;
      read_reg(N_OUTER + i, REG_STATUS, d);
      check(d[0], $sformatf("inner %0d not locked (status %h)", i, d));
      if (d[0]) m_lock++;
    end
    read_reg(0, REG_STATUS, d);
    check(d[0] && d[5:1] == 0, $sformatf("outer 0 status %h", d));

    // link test: counter words on every link, checked in the inner nodes
    write_all(0, REG_MODE, 32'(MODE_LINKTEST));
    repeat (2000) @(negedge clk);
    write_all(1, REG_MODE, 32'(MODE_LINKTEST));
    repeat (20000) @(negedge clk);
    for (int i = 0; i < N_INNER; i++) begin
      read_reg(N_OUTER + i, 16'h0017 + 16'(i), d);
      check(d > 1000, $sformatf("link test: inner %0d input %0d words %0d", i, i, d));
      if (d > 1000) m_link++;
      read_reg(N_OUTER + i, 16'h0011 + 16'(i), d);
      check(d == 0, $sformatf("link test: inner %0d input %0d bit errors %0d", i, i, d));
    end

    // beam mode; one coefficient written and read back through the UART
    write_reg(3, COEF_BASE + 16'(5 * 1024 + 77), 32'h1234_abcd);
    read_reg(3, COEF_BASE + 16'(5 * 1024 + 77), d);
    check(d == 32'h1234_abcd, $sformatf("coefficient read back %h", d));
    if (d == 32'h1234_abcd) m_coef++;
    write_all(1, REG_MODE, 32'(MODE_BEAM));
    write_all(1, REG_SHIFT, 32'd3);
    write_all(0, REG_SHIFT, 32'd4);
    write_all(0, REG_MODE, 32'(MODE_BEAM));
    w0 = total_edt();
    repeat (40000) @(negedge clk);
    check(total_edt() - w0 > 4000, $sformatf("beam mode recorded %0d words", total_edt() - w0));
    if (total_edt() - w0 > 4000) m_beam++;
    read_reg(N_OUTER, 16'h0010, d);
    $display("inner 0 sync errors so far %0d", d);

    // FFT mode with only bins 0..63 enabled
    for (int w = 0; w < 32; w++) write_all(0, REG_BINMASK + 16'(w), (w < 2) ? 32'hffff_ffff : 32'h0);
    write_all(1, REG_MODE, 32'(MODE_FFT));
    write_all(0, REG_MODE, 32'(MODE_FFT));
    repeat (20000) @(negedge clk);
    w0 = total_edt();
    repeat (40000) @(negedge clk);
    check(total_edt() - w0 > 500, $sformatf("FFT mode recorded %0d words", total_edt() - w0));
    if (total_edt() - w0 > 500) m_fft++;
    read_reg(N_OUTER + 1, REG_STATUS, d);
    check(d[0], $sformatf("inner 1 not locked in FFT mode (status %h)", d));

    // overflow: hold outer 0 link 0 down while beam data keeps coming
    write_all(0, REG_MODE, 32'(MODE_BEAM));
    down[0][0] = 1;
    repeat (60000) @(negedge clk);
    read_reg(0, REG_STATUS, d);
    check(d[3] || d[4], $sformatf("overflow not flagged, status %h", d));
    if (d[3] || d[4]) m_ovf++;

    for (int n = 0; n < N_OUTER; n++)
      for (int l = 0; l < N_LINKS_OUT; l++) m_cc += stalls[n][l];

    $display("mechanisms: raw=%0d lock=%0d link=%0d coef=%0d beam=%0d fft=%0d cc_stall=%0d ovf=%0d",
             m_raw, m_lock, m_link, m_coef, m_beam, m_fft, m_cc, m_ovf);
    check(m_raw > 0, "raw mode never recorded");
    check(m_lock > 0, "inner sync never locked");
    check(m_link > 0, "link test never ran");
    check(m_coef > 0, "coefficient access never worked");
    check(m_beam > 0, "beam mode never recorded");
    check(m_fft > 0, "FFT mode never recorded");
    check(m_cc > 0, "no clock-correction stall");
    check(m_ovf > 0, "overflow never flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
