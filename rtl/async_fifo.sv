// async_fifo: dual-clock FIFO with Gray-coded pointers, used to carry decoded
// receiver-node frames from the 60 MHz clock that arrives with the LVDS data
// into the 62.5 MHz beamforming clock of an ML310 node.
//
// Pointers are kept in binary and Gray code in their own domain; each Gray
// pointer crosses through a two-flop synchroniser.  `wfull` and `rempty` are
// therefore conservative.  A write while full is dropped and pulses
// `woverflow` (write domain).  Read data is first-word fall-through.  Each side
// has its own synchronous reset; both must be applied together at start-up.
module async_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic          wclk,
  input  logic          wrst,
  input  logic          wpush,
  input  logic [W-1:0]  wdata,
  output logic          wfull,
  output logic          woverflow,
  input  logic          rclk,
  input  logic          rrst,
  input  logic          rpop,
  output logic [W-1:0]  rdata,
  output logic          rempty
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0]  wbin_nx, rbin_nx;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign wfull     = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign woverflow = wpush && wfull;
  assign wbin_nx   = wbin + (AW+1)'(wpush && !wfull);

  always_ff @(posedge wclk) begin
    if (wpush && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_nx; wgray <= b2g(wbin_nx);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end

  // read side
  assign rempty  = (rgray == wgray_r2);
  assign rdata   = mem[rbin[AW-1:0]];
  assign rbin_nx = rbin + (AW+1)'(rpop && !rempty);

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_nx; rgray <= b2g(rbin_nx);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end
endmodule
