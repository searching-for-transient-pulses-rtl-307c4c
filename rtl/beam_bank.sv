// beam_bank: forms NB beams from the node's two antenna streams, the "Beams
// 1-4" and "Beams 5-8" blocks of an outer node.
//
// For every input element (a time sample, or one FFT bin) and every beam b the
// bank computes  sum over antennas a of  C[b][a][addr] * X[a],  where C is a
// complex coefficient from the beam's per-antenna coeff_table and X the
// antenna's complex value.  In FFT mode `in_addr` is the bin, so every channel
// has its own coefficient, as the paper describes; in time-domain beamforming
// the paper gives one weight per antenna and beam, and this design takes it
// from entry 0 of the table.  Time samples (8-bit I/Q) enter the same 18-bit
// multiplier port sign-extended.
//
// The sum of the two 70-bit products is the first level of the paper's 4-level
// adder tree; the other three levels are in the inner node.  Because a link
// word has room for 28 payload bits, each partial beam is reduced here: shifted
// right by `shift`, rounded to nearest (ties to even) and saturated to 14-bit
// I and Q.  This intermediate reduction is this design's choice.
//
// Pipeline: coefficient read 1, cmult 3, antenna sum 1, reduction 1: outputs
// appear 6 cycles after `in_valid`, with the element's tag.  The control port
// reaches table t = beam*2 + antenna of this bank.
module beam_bank
  import eta_pkg::*;
#(
  parameter int unsigned NB = BEAMS_PER_LINK
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    fft_mode,
  input  logic [4:0]              shift,
  input  logic                    in_valid,
  input  fftw_t [N_ANT-1:0]       in_x,
  input  logic [FFT_LOG2N-1:0]    in_addr,
  input  logic [FFT_LOG2N+3:0]    in_tag,    // {seq, idx} carried along
  output logic                    out_valid,
  output logic [NB-1:0][PAY_W-1:0] out_beam,  // {I14, Q14} per beam
  output logic [FFT_LOG2N+3:0]    out_tag,
  // control port
  input  logic [$clog2(NB*N_ANT)-1:0] ctl_table,
  input  logic [FFT_LOG2N-1:0]    ctl_addr,
  input  logic                    ctl_we,
  input  coef_t                   ctl_wdata,
  output coef_t                   ctl_rdata
);
  localparam int unsigned NT = NB * N_ANT;

  logic [FFT_LOG2N-1:0] raddr;
  assign raddr = fft_mode ? in_addr : '0;

  coef_t cdata [NT];
  coef_t crd   [NT];
  logic [$clog2(NT)-1:0] ctl_table_q;

  // operand alignment: the coefficient arrives one cycle after the address
  logic              v1;
  fftw_t [N_ANT-1:0] x1;
  logic [FFT_LOG2N+3:0] tag_d [5];
  always_ff @(posedge clk) begin
    x1 <= in_x;
    ctl_table_q <= ctl_table;
    tag_d[0] <= in_tag;
    for (int i = 1; i < 5; i++) tag_d[i] <= tag_d[i-1];
  end
  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else     v1 <= in_valid;
  end

  prod_t pr [NT];
  logic  pv [NT];

  for (genvar t = 0; t < NT; t++) begin : g_tab
    coeff_table u_tab (
      .clk,
      .a_addr(raddr), .a_data(cdata[t]),
      .b_addr(ctl_addr), .b_we(ctl_we && ctl_table == t), .b_wdata(ctl_wdata),
      .b_rdata(crd[t]));
    cmult u_mul (
      .clk, .rst, .in_valid(v1), .a(cdata[t]), .b(x1[t % N_ANT]),
      .out_valid(pv[t]), .p(pr[t]));
  end

  assign ctl_rdata = crd[ctl_table_q];

  // antenna sum (first adder-tree level) and reduction
  logic signed [PROD_W:0] sre [NB];
  logic signed [PROD_W:0] sim [NB];
  logic                   sv;
  always_ff @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      sre[b] <= (PROD_W+1)'(pr[2*b].re) + (PROD_W+1)'(pr[2*b+1].re);
      sim[b] <= (PROD_W+1)'(pr[2*b].im) + (PROD_W+1)'(pr[2*b+1].im);
    end
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      sv <= 1'b0; out_valid <= 1'b0; out_beam <= '0; out_tag <= '0;
    end else begin
      sv        <= pv[0];
      out_valid <= sv;
      out_tag   <= tag_d[4];
      for (int b = 0; b < NB; b++)
        out_beam[b] <= {PART_W'(round_sat(48'(sre[b]), shift, PART_W)),
                        PART_W'(round_sat(48'(sim[b]), shift, PART_W))};
    end
  end
endmodule
