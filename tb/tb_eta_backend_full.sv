// tb_eta_backend_full: the whole back end at its real parameters (no
// overrides: 12 outer nodes, 4 inner nodes, 1024-point FFTs, 115200-baud
// control UART).  After reset every node is in raw mode, so S25 counter data
// must flow from all twelve receivers through the Aurora channel models into
// the four recording streams without any configuration.  The test then reads
// each inner node's status over the full-speed UART and checks the
// synchroniser is locked with no receive or EDT buffer overflow.
module tb_eta_backend_full;
  import eta_pkg::*;
  localparam int CPB = 543;

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

  eta_backend dut (
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

  int edt_words [N_INNER];
  always @(posedge clk) if (!rst)
    for (int i = 0; i < N_INNER; i++) if (edt_valid[i]) edt_words[i]++;

  int checks = 0, failures = 0;
  initial begin
    logic [31:0] d;
    repeat (10) @(negedge clk); s25_rst = 0; rst = 0;
    repeat (30000) @(negedge clk);
    for (int i = 0; i < N_INNER; i++) begin
      checks++;
      if (edt_words[i] < 1000) begin failures++; $display("inner %0d recorded %0d words", i, edt_words[i]); end
    end
    for (int i = 0; i < N_INNER; i++) begin
      read_reg(N_OUTER + i, REG_STATUS, d);
      checks++;
      if (!d[0] || d[7:1] != 0) begin failures++; $display("inner %0d status %h", i, d); end
    end
    $display("EDT words: %0d %0d %0d %0d", edt_words[0], edt_words[1], edt_words[2], edt_words[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
