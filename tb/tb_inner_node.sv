// tb_inner_node: one inner node fed by six testbench word sources (one word
// every 8 clocks each, 16-word vectors with vstart and vector numbers, the
// sources starting at different times) and a UART control PC
// (CLKS_PER_BIT shortened to 8).  Checked:
//   raw mode, inputs 2 and 5 selected: the EDT stream alternates the words of
//     input 2 and input 5 (upper half first), in order and aligned;
//   link test: counter payloads give word counts and no bit errors per input;
//   beam mode: output words are produced; STATUS locked, no overflow.
module tb_inner_node;
  import eta_pkg::*;
  localparam int CPB = 8;
  logic clk = 0, rst = 1;
  always #24 clk = ~clk;
  logic [5:0] rx_src_rdy = '0, channel_up = '1;
  word_t [5:0] rx_d = '0;
  logic edt_valid; logic [15:0] edt_data;
  logic [0:0] uart_rxd = '1, uart_txd;
  inner_node #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst, .rx_src_rdy, .rx_d, .channel_up,
    .edt_valid, .edt_data, .uart_rxd(uart_rxd[0]), .uart_txd(uart_txd[0]));

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

  // sources: word n of input i has payload {i, n} (raw) or n (link test)
  bit lt = 0;
  int n = 0;
  initial begin
    wait (!rst);
    forever begin
      repeat (7) @(negedge clk);
      @(negedge clk);
      for (int i = 0; i < 6; i++) begin
        rx_src_rdy[i] = n >= 3 * i;
        rx_d[i].flag.vstart = n % 16 == 0;
        rx_d[i].flag.seq = 3'(n / 16);
        rx_d[i].payload = lt ? 28'(n) : {4'(i), 24'(n)};
      end
      n++;
      @(negedge clk); rx_src_rdy = '0;
    end
  end

  // EDT monitor: rebuild 32-bit words, alternating A and B
  int nw = 0, bad = 0;
  logic [15:0] hi; logic [27:0] pa;
  always @(posedge clk) if (!rst && edt_valid) begin
    if (nw % 2 == 0) hi = edt_data;
    else begin
      logic [27:0] p;
      p = 28'({hi, edt_data});
      if ((nw / 2) % 2 == 0) begin
        if (p[27:24] != 4'd2) bad++;
        pa = p;
      end else if (p[27:24] != 4'd5 || p[23:0] != pa[23:0]) bad++;
    end
    nw++;
  end

  initial begin
    logic [31:0] d;
    int b0, w0;
    repeat (10) @(negedge clk); rst = 0;
    write_reg(0, REG_MODE, 32'(MODE_RAW) | (2 << 4) | (5 << 8));
    repeat (2000) @(negedge clk);
    b0 = bad; w0 = nw;
    repeat (20000) @(negedge clk);
    check(nw - w0 > 2000 && bad == b0, $sformatf("raw: %0d EDT words, %0d bad", nw - w0, bad - b0));
    read_reg(0, REG_STATUS, d);
    check(d[0] && d[7:1] == 0, $sformatf("status %h", d));
    lt = 1;
    write_reg(0, REG_MODE, 32'(MODE_LINKTEST));
    repeat (10000) @(negedge clk);
    for (int i = 0; i < 6; i++) begin
      read_reg(0, 16'h0017 + 16'(i), d); check(d > 500, $sformatf("input %0d words %0d", i, d));
      read_reg(0, 16'h0011 + 16'(i), d); check(d == 0, $sformatf("input %0d bit errors %0d", i, d));
    end
    write_reg(0, REG_SHIFT, 32'd3);
    write_reg(0, REG_MODE, 32'(MODE_BEAM));
    w0 = nw;
    repeat (10000) @(negedge clk);
    check(nw - w0 > 1000, $sformatf("beam: %0d EDT words", nw - w0));
    read_reg(0, REG_STATUS, d);
    check(d[0] && d[7:1] == 0, $sformatf("final status %h", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
