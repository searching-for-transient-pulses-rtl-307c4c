// eta_backend: the digital back-end of the ETA radio telescope, the FPGA
// cluster between the twelve S25 receiver nodes and the four recording PCs:
// twelve outer nodes and four inner nodes.
//
// Topology (from the paper): each outer node takes the two antennas of one S25
// board.  The cluster is split by polarisation: outer nodes 0-5 and inner
// nodes 0-1 handle the north-south dipoles, outer nodes 6-11 and inner nodes
// 2-3 the east-west ones.  Link 0 of an outer node (beams 1-4) goes to the
// first inner node of its half, link 1 (beams 5-8) to the second, and outer
// node k of a half arrives on input k of both inner nodes.  Every node has its
// own UART to the control PC.
//
// The links between the two tiers are Aurora channels over RocketIO
// transceivers and InfiniBand cables, vendor IP that is not part of this RTL.
// The top therefore brings out both ends: `tx_*` are the user-side LocalLink
// ports of the outer nodes' Aurora cores and `rx_*` those of the inner nodes'.
// The intended connection is
//   rx_*[2*h + l][k]  <-  tx_*[6*h + k][l]     (half h, link l, outer node k).
// `clk` is the 62.5 MHz beamforming clock (the board's 125 MHz reference
// divided by two); each S25 stream brings its own 60 MHz clock.
module eta_backend
  import eta_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 543
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // receiver nodes
  input  logic [N_OUTER-1:0]                    s25_clk,
  input  logic [N_OUTER-1:0]                    s25_rst,
  input  logic [N_OUTER-1:0][3:0]               s25_data,
  input  logic [N_OUTER-1:0]                    s25_cnt,
  // outer-node Aurora transmit (LocalLink)
  output logic [N_OUTER-1:0][N_LINKS_OUT-1:0]   tx_src_rdy,
  output word_t [N_OUTER-1:0][N_LINKS_OUT-1:0]  tx_d,
  input  logic [N_OUTER-1:0][N_LINKS_OUT-1:0]   tx_dst_rdy,
  input  logic [N_OUTER-1:0][N_LINKS_OUT-1:0]   tx_channel_up,
  // inner-node Aurora receive (LocalLink)
  input  logic [N_INNER-1:0][N_INNER_IN-1:0]    rx_src_rdy,
  input  word_t [N_INNER-1:0][N_INNER_IN-1:0]   rx_d,
  input  logic [N_INNER-1:0][N_INNER_IN-1:0]    rx_channel_up,
  // recording PCs (EDT LVDS)
  output logic [N_INNER-1:0]                    edt_valid,
  output logic [N_INNER-1:0][15:0]              edt_data,
  // control PC: outer nodes 0-11, then inner nodes 0-3
  input  logic [N_OUTER+N_INNER-1:0]            uart_rxd,
  output logic [N_OUTER+N_INNER-1:0]            uart_txd
);
  for (genvar o = 0; o < N_OUTER; o++) begin : g_outer
    outer_node #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_outer (
      .clk, .rst,
      .s25_clk(s25_clk[o]), .s25_rst(s25_rst[o]), .s25_data(s25_data[o]), .s25_cnt(s25_cnt[o]),
      .tx_src_rdy(tx_src_rdy[o]), .tx_d(tx_d[o]), .tx_dst_rdy(tx_dst_rdy[o]),
      .channel_up(tx_channel_up[o]),
      .uart_rxd(uart_rxd[o]), .uart_txd(uart_txd[o]));
  end

  for (genvar i = 0; i < N_INNER; i++) begin : g_inner
    inner_node #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_inner (
      .clk, .rst,
      .rx_src_rdy(rx_src_rdy[i]), .rx_d(rx_d[i]), .channel_up(rx_channel_up[i]),
      .edt_valid(edt_valid[i]), .edt_data(edt_data[i]),
      .uart_rxd(uart_rxd[N_OUTER+i]), .uart_txd(uart_txd[N_OUTER+i]));
  end
endmodule
