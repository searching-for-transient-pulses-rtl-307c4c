// uart_rx: 8N1 serial receiver for the control link to the control PC.  The
// line is synchronised with two flops; a falling edge starts a frame, which is
// sampled in the middle of each bit (CLKS_PER_BIT clocks per bit).  A frame
// whose stop bit is low is discarded.  `valid` pulses for one cycle with the
// received byte.  The paper says only that each node talks to the control PC
// through a UART; the format and rate are this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 543   // 62.5 MHz / 115200 baud
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data
);
  typedef enum logic [1:0] {IDLE, START, BITS, STOP} st_t;
  st_t st;
  logic r1, r2;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] tmr;
  logic [2:0] nbit;
  logic [7:0] sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= IDLE; r1 <= 1'b1; r2 <= 1'b1; tmr <= '0; nbit <= '0; sh <= '0;
      valid <= 1'b0; data <= '0;
    end else begin
      r1 <= rxd; r2 <= r1;
      valid <= 1'b0;
      unique case (st)
        IDLE:  if (!r2) begin st <= START; tmr <= '0; end
        START: if (32'(tmr) == CLKS_PER_BIT/2 - 1) begin
                 if (!r2) begin st <= BITS; tmr <= '0; nbit <= '0; end
                 else st <= IDLE;
               end else tmr <= tmr + 1'b1;
        BITS:  if (32'(tmr) == CLKS_PER_BIT - 1) begin
                 tmr <= '0; sh <= {r2, sh[7:1]}; nbit <= nbit + 3'd1;
                 if (nbit == 3'd7) st <= STOP;
               end else tmr <= tmr + 1'b1;
        STOP:  if (32'(tmr) == CLKS_PER_BIT - 1) begin
                 st <= IDLE;
                 if (r2) begin valid <= 1'b1; data <= sh; end
               end else tmr <= tmr + 1'b1;
      endcase
    end
  end
endmodule
