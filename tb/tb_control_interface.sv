// tb_control_interface: the control PC is modelled with UART byte tasks
// (CLKS_PER_BIT shortened to 16).  Random register writes must produce one
// bus_we cycle with the right address and data; random reads must produce a
// bus_re cycle and return, MSB first, the data the bus presented RD_LAT
// cycles later.  Unknown command bytes must be ignored.
module tb_control_interface;
  localparam int CPB = 16;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic uart_rxd = 1, uart_txd, bus_we, bus_re;
  logic [15:0] bus_addr; logic [31:0] bus_wdata, bus_rdata;
  control_interface #(.CLKS_PER_BIT(CPB)) dut (.*);
  // bus model: read data is a function of the address, valid from RD_LAT on
  logic [15:0] a_q [3];
  always @(posedge clk) begin a_q[0] <= bus_addr; a_q[1] <= a_q[0]; a_q[2] <= a_q[1]; end
  assign bus_rdata = {a_q[1] ^ 16'h5a5a, ~a_q[1]};
  int checks = 0, failures = 0, nwe = 0, nre = 0;
  logic [15:0] we_a; logic [31:0] we_d;
  always @(posedge clk) if (!rst) begin
    if (bus_we) begin nwe++; we_a = bus_addr; we_d = bus_wdata; end
    if (bus_re) nre++;
  end
  task automatic send_byte(logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin @(negedge clk); uart_rxd = f[i]; repeat (CPB - 1) @(negedge clk); end
  endtask
  task automatic recv_byte(output logic [7:0] b);
    @(negedge uart_txd);
    repeat (CPB / 2) @(negedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(negedge clk); b[i] = uart_txd; end
    repeat (CPB) @(negedge clk);
  endtask
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    repeat (20) @(negedge clk);
    for (int k = 0; k < 40; k++) begin
      logic [15:0] a; logic [31:0] d, r; logic [7:0] b;
      int w0, r0;
      a = 16'($urandom); d = $urandom; w0 = nwe; r0 = nre;
      if (k % 7 == 3) send_byte(8'h3f);  // junk byte, ignored
      send_byte("W"); send_byte(a[15:8]); send_byte(a[7:0]);
      for (int i = 3; i >= 0; i--) send_byte(d[8*i +: 8]);
      repeat (CPB) @(negedge clk);
      checks++;
      if (nwe != w0 + 1 || we_a != a || we_d != d) begin failures++; $display("write %h %h got %h %h", a, d, we_a, we_d); end
      fork
        begin send_byte("R"); send_byte(a[15:8]); send_byte(a[7:0]); end
        for (int i = 3; i >= 0; i--) begin recv_byte(b); r[8*i +: 8] = b; end
      join
      checks++;
      if (nre != r0 + 1 || r != {a ^ 16'h5a5a, ~a}) begin failures++; $display("read %h got %h", a, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
