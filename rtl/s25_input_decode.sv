// s25_input_decode: receives the source-synchronous LVDS stream from one S25
// receiver node and turns it into pairs of complex antenna samples in the
// node's 62.5 MHz beamforming clock.
//
// The paper gives the link: a 60 MHz clock, four data bits and one counter bit,
// 30 MB/s carrying two antennas.  That is 8 nibbles per sample pair, so a
// sample pair (16-bit complex per antenna) arrives every 8 clocks, 7.5 MSPS.
// The nibble order within a frame and the use of the counter bit are this
// design's choices: nibbles go A.re[7:4], A.re[3:0], A.im[7:4], A.im[3:0], then
// the same for antenna B; the counter bit is high on the first nibble of the
// frame whose board-wide sample counter is a multiple of 1024 (the start of a
// vector), low otherwise.  Because that counter runs in step on all S25
// boards, the mark lets inner nodes align vectors from different boards.
//
// The decoder is unlocked after reset and locks on the first mark.  It then
// counts nibbles and frames itself; a mark that arrives anywhere but where
// expected, or a missing mark, counts as a sync error and the decoder relocks
// on that mark.  Frames cross into the system clock through an async FIFO
// carrying the sample, its index in the vector, the vector number and the
// error event.  Output: one `out_valid` cycle per sample pair, latency a few
// cycles of each clock.  `overflow` is sticky (cleared by reset only).
module s25_input_decode
  import eta_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  // receiver-node side (60 MHz source-synchronous clock)
  input  logic              s25_clk,
  input  logic              s25_rst,
  input  logic [3:0]        s25_data,
  input  logic              s25_cnt,
  // node side (62.5 MHz)
  input  logic              clk,
  input  logic              rst,
  output logic              out_valid,
  output samp_t [N_ANT-1:0] out_samp,
  output logic [FFT_LOG2N-1:0] out_idx,
  output logic [2:0]        out_seq,
  output logic              sync_err,     // one-cycle pulse per sync error
  output logic              locked,       // in node clock
  output logic              overflow      // sticky
);
  typedef struct packed {
    logic                  err;
    logic [FFT_LOG2N-1:0]  idx;
    logic [2:0]            seq;
    samp_t [N_ANT-1:0]     samp;
  } frame_t;

  logic [2:0]            slot;
  logic                  lock_r;
  logic [FFT_LOG2N-1:0]  fidx;
  logic [2:0]            fseq;
  logic [27:0]           shreg;
  logic                  err_pend, push, wfull, wovf;
  frame_t                wframe, rframe;
  logic                  rempty;
  logic                  lk1, lk2;

  // ---------------- 60 MHz side ----------------
  always_ff @(posedge s25_clk) begin
    if (s25_rst) begin
      slot <= '0; lock_r <= 1'b0; fidx <= '0; fseq <= '0;
      shreg <= '0; err_pend <= 1'b0; push <= 1'b0; wframe <= '0;
    end else begin
      push <= 1'b0;
      if (!lock_r) begin
        if (s25_cnt) begin                 // lock on the first mark
          lock_r <= 1'b1;
          slot   <= 3'd1;
          fidx   <= '0;
          shreg  <= {24'b0, s25_data};
        end
      end else begin
        shreg <= {shreg[23:0], s25_data};
        slot  <= slot + 3'd1;
        if (slot == 3'd7) begin
          wframe.err  <= err_pend;
          wframe.idx  <= fidx;
          wframe.seq  <= fseq;
          wframe.samp <= {shreg[11:0], s25_data, shreg[27:12]};   // {B, A}
          push        <= 1'b1;
          err_pend    <= 1'b0;
          fidx        <= fidx + 1'b1;
          if (fidx == FFT_LOG2N'(FFT_N - 1)) fseq <= fseq + 3'd1;
        end
        // a mark is expected exactly on slot 0 of a vector's first frame
        if (s25_cnt && !(slot == 3'd0 && fidx == '0)) begin
          err_pend <= 1'b1;                // unexpected mark: relock on it
          slot     <= 3'd1;
          fidx     <= '0;
          shreg    <= {24'b0, s25_data};
        end else if (!s25_cnt && slot == 3'd0 && fidx == '0) begin
          err_pend <= 1'b1;                // missing mark: keep counting
        end
      end
    end
  end

  async_fifo #(.W($bits(frame_t)), .DEPTH(FIFO_DEPTH)) u_cdc (
    .wclk(s25_clk), .wrst(s25_rst), .wpush(push), .wdata(wframe),
    .wfull(wfull), .woverflow(wovf),
    .rclk(clk), .rrst(rst), .rpop(!rempty), .rdata(rframe), .rempty(rempty));

  // sticky overflow, synchronised into the node clock
  logic ovf_w, ov1, ov2;
  always_ff @(posedge s25_clk) begin
    if (s25_rst) ovf_w <= 1'b0;
    else if (wovf) ovf_w <= 1'b1;
  end

  // ---------------- 62.5 MHz side ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_samp <= '0; out_idx <= '0; out_seq <= '0;
      sync_err <= 1'b0; lk1 <= 1'b0; lk2 <= 1'b0; ov1 <= 1'b0; ov2 <= 1'b0;
    end else begin
      out_valid <= !rempty;
      sync_err  <= !rempty && rframe.err;
      if (!rempty) begin
        out_samp <= rframe.samp;
        out_idx  <= rframe.idx;
        out_seq  <= rframe.seq;
      end
      lk1 <= lock_r; lk2 <= lk1;
      ov1 <= ovf_w;  ov2 <= ov1;
    end
  end
  assign locked   = lk2;
  assign overflow = ov2;

  // unused in this clock domain
  logic unused;
  assign unused = wfull;
endmodule
