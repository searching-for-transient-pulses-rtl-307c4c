// sync_fifo: single-clock first-in first-out buffer used wherever a node has to
// absorb a burst (per-beam output queues, Aurora transmit and receive buffers,
// the recording-link encoder).
//
// Storage is a simple dual-port array (one write, one read port) of DEPTH
// words; DEPTH must be a power of two.  A push when full is dropped and raises
// `overflow` for one cycle, which the nodes collect into sticky "buffer ever
// overflowed" status bits.  Read data is shown combinationally at `rdata` while
// `!empty` (first-word fall-through); `pop` advances.  Reset empties it.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       push,
  input  logic [W-1:0]               wdata,
  input  logic                       pop,
  output logic [W-1:0]               rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          do_push, do_pop;

  assign count    = wptr - rptr;
  assign empty    = (wptr == rptr);
  assign full     = (count == (AW+1)'(DEPTH));
  assign do_push  = push && !full;
  assign do_pop   = pop && !empty;
  assign overflow = push && full;
  assign rdata    = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
    end
  end
endmodule
