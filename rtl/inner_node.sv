// inner_node: the FPGA design of an ETA inner node (an ML310 board).  It
// receives the word streams of up to six outer nodes over Aurora links,
// aligns them by their vector-start flags, combines them and sends the result
// to one recording PC over the 16-bit LVDS interface of an EDT card.
//
// Data path (the paper's inner-node block diagram):
//   Aurora receive x6 -> pattern_checker x6 (link tests) -> inner_sync
//   -> inner_combine (raw or beams) -> edt_encode -> PC
// plus the control_interface.  In beam modes all six inputs are summed, which
// completes the 12-antenna beam of one polarisation; in raw mode two inputs
// (two outer nodes, four antennas) are recorded side by side.
//
// Registers (32 bit; the map is this design's choice):
//   0x0000 MODE   [1:0] mode, [6:4] raw input A, [10:8] raw input B,
//                 [21:16] input enable mask (0 = all six)
//   0x0001 SHIFT  [4:0] right shift of the beam sums
//   0x0003 STATUS [0] locked, [6:1] receive buffer overflow, [7] EDT buffer
//                 overflow, [13:8] Aurora channel up (read only)
//   0x0010        synchronisation errors
//   0x0011..0x0016 bit errors seen on inputs 0..5 in link-test mode
//   0x0017..0x001C words checked on inputs 0..5 in link-test mode
module inner_node
  import eta_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 543,
  parameter int unsigned RX_DEPTH     = 4096,
  parameter int unsigned EDT_DEPTH    = 1024
) (
  input  logic                    clk,
  input  logic                    rst,
  // Aurora LocalLink receive ports from six outer nodes
  input  logic [N_INNER_IN-1:0]   rx_src_rdy,
  input  word_t [N_INNER_IN-1:0]  rx_d,
  input  logic [N_INNER_IN-1:0]   channel_up,
  // EDT card
  output logic                    edt_valid,
  output logic [15:0]             edt_data,
  // control PC
  input  logic                    uart_rxd,
  output logic                    uart_txd
);
  logic [15:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic        bus_we, bus_re;

  control_interface #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_ctl (
    .clk, .rst, .uart_rxd, .uart_txd,
    .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata);

  mode_t       mode;
  logic [2:0]  raw_a, raw_b;
  logic [4:0]  shift;
  logic [N_INNER_IN-1:0] en_reg, en_mask;

  always_ff @(posedge clk) begin
    if (rst) begin
      mode <= MODE_RAW; raw_a <= 3'd0; raw_b <= 3'd1; shift <= '0; en_reg <= '0;
    end else if (bus_we) begin
      unique case (bus_addr)
        REG_MODE: begin
          mode  <= mode_t'(bus_wdata[1:0]);
          raw_a <= bus_wdata[6:4];
          raw_b <= bus_wdata[10:8];
          en_reg <= bus_wdata[21:16];
        end
        REG_SHIFT: shift <= bus_wdata[4:0];
        default: ;
      endcase
    end
  end

  // inputs taking part: raw modes use the two selected ones
  always_comb begin
    en_mask = (en_reg == '0) ? '1 : en_reg;
    if (mode == MODE_RAW || mode == MODE_LINKTEST) begin
      en_mask = '0;
      en_mask[raw_a] = 1'b1;
      en_mask[raw_b] = 1'b1;
    end
  end

  // link bit-error checkers
  logic [31:0] c_words [N_INNER_IN];
  logic [31:0] c_werr  [N_INNER_IN];
  logic [31:0] c_berr  [N_INNER_IN];
  for (genvar i = 0; i < N_INNER_IN; i++) begin : g_chk
    pattern_checker #(.W(PAY_W), .LANE_W(PAY_W), .INC(1)) u_chk (
      .clk, .rst, .enable(mode == MODE_LINKTEST), .in_valid(rx_src_rdy[i]),
      .in_data(rx_d[i].payload), .words(c_words[i]), .word_errors(c_werr[i]),
      .bit_errors(c_berr[i]));
  end

  logic                  s_valid, locked, s_err, e_ready;
  word_t [N_INNER_IN-1:0] s_word;
  logic [N_INNER_IN-1:0] rx_ovf;
  logic [31:0]           sync_errs;

  inner_sync #(.N(N_INNER_IN), .DEPTH(RX_DEPTH)) u_sync (
    .clk, .rst, .en_mask, .rx_valid(rx_src_rdy), .rx_word(rx_d),
    .out_ready(e_ready), .out_valid(s_valid), .out_word(s_word),
    .locked, .sync_err(s_err), .overflow(rx_ovf));

  always_ff @(posedge clk) begin
    if (rst) sync_errs <= '0;
    else if (s_err && sync_errs != '1) sync_errs <= sync_errs + 1;
  end

  logic  a_valid, b_valid, e_ovf;
  word_t a_word, b_word;

  inner_combine #(.N(N_INNER_IN)) u_comb (
    .clk, .rst, .mode, .shift, .raw_a, .raw_b, .en_mask,
    .in_valid(s_valid), .in_word(s_word),
    .a_valid, .a_word, .b_valid, .b_word);

  edt_encode #(.DEPTH(EDT_DEPTH)) u_edt (
    .clk, .rst, .a_valid, .a_word, .b_valid, .b_word, .ready(e_ready),
    .edt_valid, .edt_data, .overflow(e_ovf));

  always_ff @(posedge clk) begin
    if (bus_addr >= 16'h0011 && bus_addr <= 16'h0016)
      bus_rdata <= c_berr[3'(bus_addr - 16'h0011)];
    else if (bus_addr >= 16'h0017 && bus_addr <= 16'h001C)
      bus_rdata <= c_words[3'(bus_addr - 16'h0017)];
    else begin
      unique case (bus_addr)
        REG_MODE:   bus_rdata <= {10'b0, en_reg, 5'b0, raw_b, 1'b0, raw_a, 2'b0, mode};
        REG_SHIFT:  bus_rdata <= {27'b0, shift};
        REG_STATUS: bus_rdata <= {18'b0, channel_up, e_ovf, rx_ovf, locked};
        16'h0010:   bus_rdata <= sync_errs;
        default:    bus_rdata <= '0;
      endcase
    end
  end

  logic unused;
  always_comb begin
    unused = bus_re;
    for (int i = 0; i < N_INNER_IN; i++) unused ^= ^c_werr[i];
  end
endmodule
