// output_select: the "Output Select and Encode" block of an outer node.  It
// turns the node's data (raw antenna samples, eight beams, or link-test
// counters) into 32-bit link words for its two Aurora links.
//
// Word format (see eta_pkg): flag {seq[2:0], vstart} and 28 payload bits.
//   MODE_RAW:      one word per sample pair, {A.re, A.im, B.re, B.im} each
//                  rounded from 8 to 7 bits, i.e. two complex 14-bit samples;
//                  sent on both links (either inner node can record it).
//   MODE_BEAM/FFT: per element, four words on link 0 (beams 1-4) and four on
//                  link 1 (beams 5-8), payload {I14, Q14}; vstart on the beam-1
//                  word of a vector's first element.  In FFT mode only bins
//                  whose bit is set in the 1024-bit bin mask are sent, and the
//                  first sent bin carries vstart.
//   MODE_LINKTEST: one word per sample tick with a 28-bit payload counting up
//                  by one, the same on both links, for bit-error tests.
// The paper gives the split of beams over the links and the 4-bit flag plus
// 28-bit sample layout; the ordering, the raw rounding and the test words are
// this design's choices.
//
// Each link has a queue of elements (QDEPTH entries of up to four words) that
// absorbs a 1024-bin FFT burst; a serialiser sends one word per cycle while the
// link's transmit buffer has room (`link_ready`).  A push into a full queue is
// lost and sets `overflow` (sticky).  The bin mask is written 32 bits at a time
// through the control port and reads back one cycle later.
module output_select
  import eta_pkg::*;
#(
  parameter int unsigned QDEPTH = FFT_N
) (
  input  logic                  clk,
  input  logic                  rst,
  input  mode_t                 mode,
  // raw / test sample stream
  input  logic                  raw_valid,
  input  samp_t [N_ANT-1:0]     raw_samp,
  input  logic [FFT_LOG2N-1:0]  raw_idx,
  input  logic [2:0]            raw_seq,
  // beam stream (both beam banks, aligned)
  input  logic                  bm_valid,
  input  logic [N_BEAMS-1:0][PAY_W-1:0] bm_beam,
  input  logic [FFT_LOG2N+3:0]  bm_tag,     // {seq[2:0], 1'b0, idx-or-bin}
  // links
  input  logic [N_LINKS_OUT-1:0] link_ready,
  output logic [N_LINKS_OUT-1:0] link_valid,
  output word_t [N_LINKS_OUT-1:0] link_word,
  output logic                  overflow,
  // bin-mask control port
  input  logic [4:0]            mask_addr,
  input  logic                  mask_we,
  input  logic [31:0]           mask_wdata,
  output logic [31:0]           mask_rdata
);
  typedef struct packed {
    logic                 four;     // 1: four beam words, 0: a single word
    flag_t                flag;
    logic [3:0][PAY_W-1:0] pay;     // pay[0] is sent first
  } entry_t;

  logic [31:0] mask [32];
  always_ff @(posedge clk) begin
    if (mask_we) mask[mask_addr] <= mask_wdata;
    mask_rdata <= mask[mask_addr];
  end

  logic [FFT_LOG2N-1:0] bin;
  logic [2:0]  bseq;
  logic        bin_en, first_pend;
  logic [27:0] tcount;
  assign bin    = bm_tag[FFT_LOG2N-1:0];
  assign bseq   = bm_tag[FFT_LOG2N+3:FFT_LOG2N+1];
  assign bin_en = mask[bin[9:5]][bin[4:0]];

  function automatic logic [REC_W-1:0] r7(input logic signed [SAMP_W-1:0] v);
    return REC_W'(round_sat(48'(v), 1, REC_W));
  endfunction

  // build this cycle's entry
  logic   push;
  entry_t e [N_LINKS_OUT];
  always_comb begin
    push = 1'b0;
    for (int l = 0; l < N_LINKS_OUT; l++) e[l] = '0;
    unique case (mode)
      MODE_RAW: if (raw_valid) begin
        push = 1'b1;
        for (int l = 0; l < N_LINKS_OUT; l++) begin
          e[l].flag = '{seq: raw_seq, vstart: raw_idx == '0};
          e[l].pay[0] = {r7(raw_samp[0].re), r7(raw_samp[0].im),
                         r7(raw_samp[1].re), r7(raw_samp[1].im)};
        end
      end
      MODE_LINKTEST: if (raw_valid) begin
        push = 1'b1;
        for (int l = 0; l < N_LINKS_OUT; l++) begin
          e[l].flag   = '{seq: tcount[12:10], vstart: tcount[9:0] == '0};
          e[l].pay[0] = tcount;
        end
      end
      default: if (bm_valid && (mode == MODE_BEAM || bin_en)) begin   // BEAM, FFT
        push = 1'b1;
        for (int l = 0; l < N_LINKS_OUT; l++) begin
          e[l].four = 1'b1;
          e[l].flag = '{seq: bseq,
                        vstart: (mode == MODE_FFT) ? (bin == '0 || first_pend) : (bin == '0)};
          for (int b = 0; b < 4; b++) e[l].pay[b] = bm_beam[l*4 + b];
        end
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tcount <= '0; first_pend <= 1'b0;
    end else begin
      if (mode == MODE_LINKTEST && raw_valid) tcount <= tcount + 1'b1;
      if (bm_valid && mode == MODE_FFT) begin
        if (bin_en)          first_pend <= 1'b0;
        else if (bin == '0)  first_pend <= 1'b1;
      end
    end
  end

  // per-link queue and serialiser
  logic [N_LINKS_OUT-1:0] ovf;
  for (genvar l = 0; l < N_LINKS_OUT; l++) begin : g_link
    entry_t head;
    logic   empty, full, pop;
    logic [1:0] wsel;
    logic [$clog2(QDEPTH):0] cnt;
    logic   last;

    sync_fifo #(.W($bits(entry_t)), .DEPTH(QDEPTH)) u_q (
      .clk, .rst, .push(push), .wdata(e[l]), .pop(pop), .rdata(head),
      .empty(empty), .full(full), .count(cnt), .overflow(ovf[l]));

    assign last = !head.four || wsel == 2'd3;
    assign pop  = !empty && link_ready[l] && last;

    always_ff @(posedge clk) begin
      if (rst) begin
        wsel <= '0; link_valid[l] <= 1'b0; link_word[l] <= '0;
      end else begin
        link_valid[l] <= !empty && link_ready[l];
        if (!empty && link_ready[l]) begin
          link_word[l].flag    <= '{seq: head.flag.seq, vstart: head.flag.vstart && wsel == '0};
          link_word[l].payload <= head.pay[wsel];
          wsel <= last ? '0 : wsel + 2'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) overflow <= 1'b0;
    else if (|ovf) overflow <= 1'b1;
  end
endmodule
