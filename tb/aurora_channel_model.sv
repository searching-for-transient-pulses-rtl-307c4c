// aurora_channel_model: behavioural stand-in for one Aurora/RocketIO link
// between an outer node (LocalLink transmit side) and an inner node (LocalLink
// receive side).  The real link is vendor IP; this model keeps only what the
// FPGA logic sees: a fixed latency of LAT cycles, and a transmit side that is
// paused for CC_LEN cycles every CC_PERIOD cycles, as the core does while it
// sends clock-correction sequences.  `down` holds the channel not ready (used
// to provoke buffer overflow); `stalls` counts clock-correction pauses that
// actually held back a word.
module aurora_channel_model
  import eta_pkg::*;
#(
  parameter int unsigned LAT       = 8,
  parameter int unsigned CC_PERIOD = 2500,
  parameter int unsigned CC_LEN    = 4
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  down,
  input  logic  tx_src_rdy,
  input  word_t tx_d,
  output logic  tx_dst_rdy,
  output logic  rx_src_rdy,
  output word_t rx_d,
  output int    stalls
);
  int unsigned cyc;
  logic  v_pipe [LAT];
  word_t d_pipe [LAT];
  logic  in_cc;

  assign in_cc      = (cyc % CC_PERIOD) < CC_LEN;
  assign tx_dst_rdy = !rst && !down && !in_cc;
  assign rx_src_rdy = v_pipe[LAT-1];
  assign rx_d       = d_pipe[LAT-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc <= 0; stalls <= 0;
      for (int i = 0; i < LAT; i++) begin v_pipe[i] <= 1'b0; d_pipe[i] <= '0; end
    end else begin
      cyc <= cyc + 1;
      if (in_cc && tx_src_rdy) stalls <= stalls + 1;
      v_pipe[0] <= tx_src_rdy && tx_dst_rdy;
      d_pipe[0] <= tx_d;
      for (int i = 1; i < LAT; i++) begin v_pipe[i] <= v_pipe[i-1]; d_pipe[i] <= d_pipe[i-1]; end
    end
  end
endmodule
