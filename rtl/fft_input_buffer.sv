// fft_input_buffer: collects one vector of 1024 sample pairs arriving at the
// antenna rate and replays it to the two FFTs as a burst, one pair per clock.
// The paper: "The outer nodes buffer 1024 samples which are streamed into the
// FFT block."
//
// Samples are written at their vector index; the one with index 1023 completes
// a vector if the vector was seen from index 0 (a vector joined in the middle
// is skipped).  The burst then starts on the next cycle unless the previous
// burst began fewer than 2048 cycles earlier (the FFT's minimum spacing); such
// a vector is dropped and `overrun` (sticky) is set.  One RAM suffices because
// the burst reads address k before the next vector can overwrite it: samples
// arrive at most once every two clocks.  Output: 1024 `out_valid` cycles, the
// first with `out_sync`, two RAM-read cycles after the completing sample;
// `out_tag` is the vector number.
module fft_input_buffer
  import eta_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  samp_t [N_ANT-1:0]    in_samp,
  input  logic [FFT_LOG2N-1:0] in_idx,
  input  logic [2:0]           in_seq,
  output logic                 out_valid,
  output logic                 out_sync,
  output samp_t [N_ANT-1:0]    out_samp,
  output logic [2:0]           out_tag,
  output logic                 overrun
);
  samp_t [N_ANT-1:0] mem [FFT_N];
  logic              have_start, rd_act, rd_v, rd_s;
  logic [FFT_LOG2N-1:0] rcnt;
  logic [11:0]       since;     // cycles since last burst start, saturating
  logic [2:0]        seq_q;

  samp_t [N_ANT-1:0] rd_q;
  always_ff @(posedge clk) begin
    if (in_valid) mem[in_idx] <= in_samp;
    rd_q     <= mem[rcnt];
    out_samp <= rd_q;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      have_start <= 1'b0; rd_act <= 1'b0; rcnt <= '0; since <= '1; seq_q <= '0;
      rd_v <= 1'b0; rd_s <= 1'b0; out_valid <= 1'b0; out_sync <= 1'b0;
      out_tag <= '0; overrun <= 1'b0;
    end else begin
      if (since != '1) since <= since + 1'b1;
      if (in_valid) begin
        if (in_idx == '0) have_start <= 1'b1;
        if (in_idx == '1 && have_start) begin
          have_start <= 1'b0;
          if (since >= 12'd2047 && !rd_act) begin
            rd_act <= 1'b1; rcnt <= '0; since <= '0; seq_q <= in_seq;
          end else begin
            overrun <= 1'b1;
          end
        end
      end
      if (rd_act) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == '1) rd_act <= 1'b0;
      end
      rd_v      <= rd_act;
      rd_s      <= rd_act && rcnt == '0;
      out_valid <= rd_v;
      out_sync  <= rd_s;
      out_tag   <= seq_q;
    end
  end
endmodule
