// edt_encode: the "EDT Encode" block of an inner node.  It multiplexes the two
// 32-bit streams A and B from inner_combine onto the 16-bit source-synchronous
// LVDS interface of the recording PC's EDT data-acquisition card.
//
// Words are sent strictly alternating A, B, A, B, each as its upper then its
// lower 16 bits, one half per clock with `edt_valid` high; the node clock is
// forwarded with the data.  Each stream has a FIFO of DEPTH words to ride out
// bursts (an FFT vector); a word pushed into a full FIFO is lost and sets the
// sticky `overflow`.  `a_ready` and `b_ready` tell the source whether it may
// send (room for at least 4 more words).  The paper gives the 16-bit interface
// and the multiplexing of two 32-bit streams; the half-word order is this
// design's choice.
module edt_encode
  import eta_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        a_valid,
  input  word_t       a_word,
  input  logic        b_valid,
  input  word_t       b_word,
  output logic        ready,
  output logic        edt_valid,
  output logic [15:0] edt_data,
  output logic        overflow
);
  word_t ha, hb;
  logic  ea, eb, fa, fb, oa, ob, pa, pb;
  logic [$clog2(DEPTH):0] ca, cb;
  logic  sel, half;

  sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_a (
    .clk, .rst, .push(a_valid), .wdata(a_word), .pop(pa), .rdata(ha),
    .empty(ea), .full(fa), .count(ca), .overflow(oa));
  sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_b (
    .clk, .rst, .push(b_valid), .wdata(b_word), .pop(pb), .rdata(hb),
    .empty(eb), .full(fb), .count(cb), .overflow(ob));

  logic  cur_e;
  word_t cur;
  assign cur_e = sel ? eb : ea;
  assign cur   = sel ? hb : ha;
  assign pa    = !sel && !ea && half;
  assign pb    =  sel && !eb && half;
  assign ready = (32'(ca) + 4 <= DEPTH) && (32'(cb) + 4 <= DEPTH);

  always_ff @(posedge clk) begin
    if (rst) begin
      sel <= 1'b0; half <= 1'b0; edt_valid <= 1'b0; edt_data <= '0; overflow <= 1'b0;
    end else begin
      if (oa || ob) overflow <= 1'b1;
      edt_valid <= !cur_e;
      if (!cur_e) begin
        edt_data <= half ? cur[15:0] : cur[31:16];
        half     <= !half;
        if (half) sel <= !sel;
      end
    end
  end

  logic unused;
  assign unused = fa ^ fb;
endmodule
