// inner_sync: the "Synchronization" block of an inner node.  It buffers the
// word streams arriving from up to six outer nodes over separate Aurora links
// and releases them in lock-step, so that the words popped together belong to
// the same element of the same vector.
//
// The paper: "The streams are synchronized with a bit field indicating the start
// of a vector", and the receive buffers absorb clock corrections and link
// latency differences; overflows are detectable.  How alignment is acquired is
// this design's choice.  Unlocked, each enabled input drops words until its
// head is a vector start.  When all enabled heads are vector starts with the
// same vector number the block locks.  If their numbers differ, the inputs
// whose number differs from that of the least-filled buffer (the newest data)
// drop their head and search again.  Locked, one word of every enabled input is
// popped whenever all have one and `out_ready` is high (disabled inputs are
// simply discarded); if the popped heads
// disagree on the vector-start bit or vector number, `sync_err` pulses and the
// block unlocks.  Output is registered (one cycle).  `overflow` bits are sticky.
module inner_sync
  import eta_pkg::*;
#(
  parameter int unsigned N     = N_INNER_IN,
  parameter int unsigned DEPTH = 4096
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [N-1:0]   en_mask,
  input  logic [N-1:0]   rx_valid,
  input  word_t [N-1:0]  rx_word,
  input  logic           out_ready,
  output logic           out_valid,
  output word_t [N-1:0]  out_word,
  output logic           locked,
  output logic           sync_err,
  output logic [N-1:0]   overflow
);
  localparam int unsigned CW = $clog2(DEPTH) + 1;
  word_t [N-1:0]  head;
  logic [N-1:0]   empty, pop, ovf;
  logic [CW-1:0]  cnt [N];

  for (genvar i = 0; i < N; i++) begin : g_fifo
    sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_q (
      .clk, .rst, .push(rx_valid[i]), .wdata(rx_word[i]), .pop(pop[i]),
      .rdata(head[i]), .empty(empty[i]), .full(), .count(cnt[i]), .overflow(ovf[i]));
  end

  logic       all_here, all_vs, any_vs, seq_same;
  logic [2:0] ref_seq, new_seq;
  logic       have_ref, mism;
  logic [CW-1:0] min_cnt;

  always_comb begin
    all_here = 1'b1; all_vs = 1'b1; any_vs = 1'b0; seq_same = 1'b1;
    have_ref = 1'b0; ref_seq = '0; new_seq = '0; min_cnt = '1;
    for (int i = 0; i < N; i++) if (en_mask[i]) begin
      if (empty[i]) all_here = 1'b0;
      if (!head[i].flag.vstart) all_vs = 1'b0;
      else any_vs = 1'b1;
      if (!have_ref) begin ref_seq = head[i].flag.seq; have_ref = 1'b1; end
      else if (head[i].flag.seq != ref_seq) seq_same = 1'b0;
      if (cnt[i] < min_cnt) begin min_cnt = cnt[i]; new_seq = head[i].flag.seq; end
    end
    mism = (any_vs && !all_vs) || (all_vs && !seq_same);
    pop = '0;
    if (!locked) begin
      for (int i = 0; i < N; i++) if (en_mask[i] && !empty[i]) begin
        if (!head[i].flag.vstart) pop[i] = 1'b1;
        else if (all_here && all_vs && !seq_same && head[i].flag.seq != new_seq) pop[i] = 1'b1;
      end
    end else if (all_here && out_ready && !mism) begin
      pop = en_mask;
    end
    // inputs that are not enabled are drained so their buffers never overflow
    pop |= ~en_mask & ~empty;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0; sync_err <= 1'b0; out_valid <= 1'b0; out_word <= '0; overflow <= '0;
    end else begin
      overflow  <= overflow | ovf;
      sync_err  <= 1'b0;
      out_valid <= 1'b0;
      if (!locked) begin
        if (all_here && all_vs && seq_same && |en_mask) locked <= 1'b1;
      end else if (all_here && mism) begin
        sync_err <= 1'b1;
        locked   <= 1'b0;
      end else if (all_here && out_ready) begin
        out_valid <= 1'b1;
        out_word  <= head;
      end
    end
  end
endmodule
