// uart_tx: 8N1 serial transmitter for read-back data to the control PC.  A
// byte offered with `start` while `busy` is low is sent LSB first after a start
// bit and followed by one stop bit, CLKS_PER_BIT clocks per bit.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 543
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       txd
);
  logic [9:0] sh;
  logic [3:0] nbit;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] tmr;

  always_ff @(posedge clk) begin
    if (rst) begin
      sh <= '1; nbit <= '0; tmr <= '0; busy <= 1'b0; txd <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        sh <= {1'b1, data, 1'b0}; nbit <= '0; tmr <= '0; busy <= 1'b1;
      end
    end else begin
      txd <= sh[0];
      if (32'(tmr) == CLKS_PER_BIT - 1) begin
        tmr <= '0; sh <= {1'b1, sh[9:1]}; nbit <= nbit + 4'd1;
        if (nbit == 4'd9) busy <= 1'b0;
      end else tmr <= tmr + 1'b1;
    end
  end
endmodule
