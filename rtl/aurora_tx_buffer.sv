// aurora_tx_buffer: transmit side of an outer node's "Aurora Interface".  It
// buffers link words in front of the Aurora core, whose LocalLink input stops
// accepting data (`tx_dst_rdy` low) during the periodic clock corrections the
// paper mentions, and hands them on one per cycle when the core accepts.
//
// The Aurora core itself (8b/10b coding, channel bonding, clock correction,
// CRC) is vendor IP and not part of this RTL; its user-side LocalLink ports
// are the outputs here.  `in_ready` is low when fewer than three entries are
// free, leaving room for the two words a registered source may still send.  A
// word pushed into a full buffer is lost and sets the sticky `overflow`, which
// the control PC can read back.
module aurora_tx_buffer
  import eta_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   in_valid,
  input  word_t  in_word,
  output logic   in_ready,
  // LocalLink towards the Aurora core
  output logic   tx_src_rdy,
  output word_t  tx_d,
  input  logic   tx_dst_rdy,
  output logic   overflow
);
  logic empty, full, ovf;
  logic [$clog2(DEPTH):0] cnt;

  sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst, .push(in_valid), .wdata(in_word), .pop(tx_dst_rdy && !empty),
    .rdata(tx_d), .empty(empty), .full(full), .count(cnt), .overflow(ovf));

  assign tx_src_rdy = !empty;
  assign in_ready   = 32'(cnt) + 3 <= DEPTH;

  always_ff @(posedge clk) begin
    if (rst) overflow <= 1'b0;
    else if (ovf) overflow <= 1'b1;
  end

  // a word is only taken from the FIFO when the core accepts it
  logic unused;
  assign unused = full;
endmodule
