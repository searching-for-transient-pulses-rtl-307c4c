// coeff_table: one beamforming coefficient table, 1024 complex coefficients of
// 32 bits (16-bit I and Q) in a dual-ported RAM, as the paper's beamforming
// figure gives it.  Port A is read by the datapath: the coefficient for the
// bin (FFT mode) or for entry 0 (time-domain mode) appears one cycle after
// `a_addr`.  Port B belongs to the control interface, which writes the
// coefficients sent by the control PC and reads them back for verification;
// its read data also appears one cycle later.  Contents are undefined until
// written.
module coeff_table
  import eta_pkg::*;
#(
  parameter int unsigned DEPTH = FFT_N
) (
  input  logic                       clk,
  input  logic [$clog2(DEPTH)-1:0]   a_addr,
  output coef_t                      a_data,
  input  logic [$clog2(DEPTH)-1:0]   b_addr,
  input  logic                       b_we,
  input  coef_t                      b_wdata,
  output coef_t                      b_rdata
);
  coef_t mem [DEPTH];

  always_ff @(posedge clk) begin
    a_data <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end
endmodule
