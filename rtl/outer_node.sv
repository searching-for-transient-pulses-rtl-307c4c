// outer_node: the FPGA design of an ETA outer node (an ML310 board).  It takes
// two antennas from one S25 receiver node, optionally transforms them with
// 1024-point FFTs, forms eight single-polarisation beams and sends beams 1-4
// to one inner node and beams 5-8 to the adjacent one over two Aurora links.
//
// Data path (the paper's outer-node block diagram):
//   s25_input_decode / test_input_gen -> source select -> pattern_checker
//   -> (FFT mode) fft_input_buffer -> fft1024 x2
//   -> beam_bank x2 (beams 1-4, 5-8) -> output_select -> aurora_tx_buffer x2
// and the control_interface, which reaches every block through registers.
// Modes (REG_MODE[1:0]): raw data, time-domain beams, FFT beams, link test.
// All logic runs on the 62.5 MHz node clock except the LVDS receive, which
// runs on the 60 MHz clock from the S25.
//
// Registers (32 bit; the map is this design's choice):
//   0x0000 MODE   [1:0] mode, [2] use test data, [3] NCO test data,
//                 [4] check incoming counter data, [5] test generator on
//   0x0001 SHIFT  [4:0] right shift applied to each partial beam
//   0x0002 TEST   [15:0] NCO phase step, [31:16] antenna-B phase offset
//   0x0003 STATUS [0] S25 locked, [1] S25 buffer overflow, [2] FFT buffer
//                 overrun, [3] output queue overflow, [5:4] Aurora transmit
//                 buffer overflow, [7:6] Aurora channel up (read only)
//   0x0010..0x0013 S25 sync errors, checked words, word errors, bit errors
//   0x0100..0x011F bin mask (bit b of word w enables bin 32w+b)
//   0x8000 + t*1024 + bin   coefficient table t = 8*bank + 2*beam + antenna,
//                 {I[31:16], Q[15:0]}: 16 tables of 1024, 16384 coefficients
module outer_node
  import eta_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 543,
  parameter int unsigned TEST_NUM     = 3,
  parameter int unsigned TEST_DEN     = 25
) (
  input  logic                 clk,          // 62.5 MHz beamforming clock
  input  logic                 rst,
  // S25 receiver node (LVDS, source synchronous)
  input  logic                 s25_clk,
  input  logic                 s25_rst,
  input  logic [3:0]           s25_data,
  input  logic                 s25_cnt,
  // Aurora LocalLink transmit ports, link 0 = beams 1-4, link 1 = beams 5-8
  output logic [N_LINKS_OUT-1:0] tx_src_rdy,
  output word_t [N_LINKS_OUT-1:0] tx_d,
  input  logic [N_LINKS_OUT-1:0] tx_dst_rdy,
  input  logic [N_LINKS_OUT-1:0] channel_up,
  // control PC
  input  logic                 uart_rxd,
  output logic                 uart_txd
);
  // ---------------- control ----------------
  logic [15:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic        bus_we, bus_re;

  control_interface #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_ctl (
    .clk, .rst, .uart_rxd, .uart_txd,
    .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata);

  mode_t       mode;
  logic        use_test, nco_mode, check_en, test_en;
  logic [4:0]  shift;
  logic [15:0] phase_inc, phase_off;

  always_ff @(posedge clk) begin
    if (rst) begin
      mode <= MODE_RAW; use_test <= 1'b0; nco_mode <= 1'b0; check_en <= 1'b0;
      test_en <= 1'b0; shift <= '0; phase_inc <= '0; phase_off <= '0;
    end else if (bus_we) begin
      unique case (bus_addr)
        REG_MODE:  {test_en, check_en, nco_mode, use_test, mode} <=
                     {bus_wdata[5:2], mode_t'(bus_wdata[1:0])};
        REG_SHIFT: shift <= bus_wdata[4:0];
        REG_TEST:  {phase_off, phase_inc} <= bus_wdata;
        default: ;
      endcase
    end
  end

  // ---------------- sources ----------------
  logic                 d_valid, t_valid, s_valid;
  samp_t [N_ANT-1:0]    d_samp, t_samp, s_samp;
  logic [FFT_LOG2N-1:0] d_idx, t_idx, s_idx;
  logic [2:0]           d_seq, t_seq, s_seq;
  logic                 s25_locked, s25_ovf, s25_err;

  s25_input_decode u_dec (
    .s25_clk, .s25_rst, .s25_data, .s25_cnt, .clk, .rst,
    .out_valid(d_valid), .out_samp(d_samp), .out_idx(d_idx), .out_seq(d_seq),
    .sync_err(s25_err), .locked(s25_locked), .overflow(s25_ovf));

  test_input_gen #(.RATE_NUM(TEST_NUM), .RATE_DEN(TEST_DEN)) u_test (
    .clk, .rst, .enable(test_en), .nco_mode, .phase_inc, .phase_off,
    .out_valid(t_valid), .out_samp(t_samp), .out_idx(t_idx), .out_seq(t_seq));

  always_comb begin
    if (use_test) begin s_valid = t_valid; s_samp = t_samp; s_idx = t_idx; s_seq = t_seq; end
    else          begin s_valid = d_valid; s_samp = d_samp; s_idx = d_idx; s_seq = d_seq; end
  end

  logic [31:0] chk_words, chk_werr, chk_berr, sync_errs;
  pattern_checker #(.W(32), .LANE_W(8), .INC(4)) u_chk (
    .clk, .rst, .enable(check_en), .in_valid(s_valid), .in_data(s_samp),
    .words(chk_words), .word_errors(chk_werr), .bit_errors(chk_berr));

  always_ff @(posedge clk) begin
    if (rst) sync_errs <= '0;
    else if (s25_err && sync_errs != '1) sync_errs <= sync_errs + 1;
  end

  // ---------------- FFT ----------------
  logic              b_valid, b_sync, fft_overrun;
  samp_t [N_ANT-1:0] b_samp;
  logic [2:0]        b_tag;
  logic [N_ANT-1:0]  f_valid, f_sync;
  logic [FFT_LOG2N-1:0] f_bin [N_ANT];
  fftw_t [N_ANT-1:0] f_data;
  logic [2:0]        f_tag [N_ANT];

  fft_input_buffer u_fbuf (
    .clk, .rst, .in_valid(s_valid && mode == MODE_FFT), .in_samp(s_samp),
    .in_idx(s_idx), .in_seq(s_seq), .out_valid(b_valid), .out_sync(b_sync),
    .out_samp(b_samp), .out_tag(b_tag), .overrun(fft_overrun));

  for (genvar a = 0; a < N_ANT; a++) begin : g_fft
    fft1024 u_fft (
      .clk, .rst, .in_valid(b_valid), .in_sync(b_sync), .in_data(b_samp[a]),
      .in_tag(b_tag), .out_valid(f_valid[a]), .out_sync(f_sync[a]),
      .out_bin(f_bin[a]), .out_data(f_data[a]), .out_tag(f_tag[a]));
  end

  // ---------------- beams ----------------
  logic                 x_valid;
  fftw_t [N_ANT-1:0]    x;
  logic [FFT_LOG2N-1:0] x_addr;
  logic [FFT_LOG2N+3:0] x_tag;
  always_comb begin
    if (mode == MODE_FFT) begin
      x_valid = f_valid[0];
      x       = f_data;
      x_addr  = f_bin[0];
      x_tag   = {f_tag[0], 1'b0, f_bin[0]};
    end else begin
      x_valid = s_valid && mode == MODE_BEAM;
      for (int a = 0; a < N_ANT; a++) begin
        x[a].re = FFT_W'(s_samp[a].re);
        x[a].im = FFT_W'(s_samp[a].im);
      end
      x_addr  = '0;
      x_tag   = {s_seq, 1'b0, s_idx};
    end
  end

  logic [N_LINKS_OUT-1:0] bk_valid;
  logic [N_LINKS_OUT-1:0][BEAMS_PER_LINK-1:0][PAY_W-1:0] bk_beam;
  logic [FFT_LOG2N+3:0] bk_tag [N_LINKS_OUT];
  coef_t                bk_rdata [N_LINKS_OUT];
  logic                 coef_sel;

  for (genvar k = 0; k < N_LINKS_OUT; k++) begin : g_bank
    beam_bank #(.NB(BEAMS_PER_LINK)) u_bank (
      .clk, .rst, .fft_mode(mode == MODE_FFT), .shift,
      .in_valid(x_valid), .in_x(x), .in_addr(x_addr), .in_tag(x_tag),
      .out_valid(bk_valid[k]), .out_beam(bk_beam[k]), .out_tag(bk_tag[k]),
      .ctl_table(bus_addr[12:10]), .ctl_addr(bus_addr[9:0]),
      .ctl_we(bus_we && bus_addr[15] && bus_addr[13] == 1'(k)),
      .ctl_wdata(bus_wdata), .ctl_rdata(bk_rdata[k]));
  end

  // ---------------- output ----------------
  logic [N_LINKS_OUT-1:0] l_valid, l_ready, tx_ovf;
  word_t [N_LINKS_OUT-1:0] l_word;
  logic        q_ovf;
  logic [31:0] mask_rdata;

  output_select u_osel (
    .clk, .rst, .mode,
    .raw_valid(s_valid), .raw_samp(s_samp), .raw_idx(s_idx), .raw_seq(s_seq),
    .bm_valid(bk_valid[0]), .bm_beam(bk_beam), .bm_tag(bk_tag[0]),
    .link_ready(l_ready), .link_valid(l_valid), .link_word(l_word), .overflow(q_ovf),
    .mask_addr(bus_addr[4:0]), .mask_we(bus_we && bus_addr[15:5] == REG_BINMASK[15:5]),
    .mask_wdata(bus_wdata), .mask_rdata(mask_rdata));

  for (genvar k = 0; k < N_LINKS_OUT; k++) begin : g_tx
    aurora_tx_buffer u_txb (
      .clk, .rst, .in_valid(l_valid[k]), .in_word(l_word[k]), .in_ready(l_ready[k]),
      .tx_src_rdy(tx_src_rdy[k]), .tx_d(tx_d[k]), .tx_dst_rdy(tx_dst_rdy[k]),
      .overflow(tx_ovf[k]));
  end

  // ---------------- read-back ----------------
  always_ff @(posedge clk) begin
    coef_sel <= bus_addr[13];
    if (bus_addr[15]) bus_rdata <= coef_sel ? bk_rdata[1] : bk_rdata[0];
    else if (bus_addr[15:5] == REG_BINMASK[15:5]) bus_rdata <= mask_rdata;
    else begin
      unique case (bus_addr)
        REG_MODE:   bus_rdata <= {26'b0, test_en, check_en, nco_mode, use_test, mode};
        REG_SHIFT:  bus_rdata <= {27'b0, shift};
        REG_TEST:   bus_rdata <= {phase_off, phase_inc};
        REG_STATUS: bus_rdata <= {24'b0, channel_up, tx_ovf, q_ovf, fft_overrun, s25_ovf, s25_locked};
        16'h0010:   bus_rdata <= sync_errs;
        16'h0011:   bus_rdata <= chk_words;
        16'h0012:   bus_rdata <= chk_werr;
        16'h0013:   bus_rdata <= chk_berr;
        default:    bus_rdata <= '0;
      endcase
    end
  end

  // both FFTs run in step; the second one's bookkeeping is not needed
  logic unused;
  assign unused = ^{f_valid[1], f_sync, f_bin[1], f_tag[1], bk_valid[1], bk_tag[1], bus_re};
endmodule
