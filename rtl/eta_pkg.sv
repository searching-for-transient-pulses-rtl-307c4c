// eta_pkg: types and constants shared by the ETA back-end RTL (outer nodes,
// inner nodes and the cluster top).
//
// Sample formats.  An antenna sample is 16-bit complex (8-bit I, 8-bit Q), the
// FFT emits 36-bit complex words (18-bit I and Q), beamforming coefficients are
// 32-bit complex (16-bit I and Q) and the beamformer's complex multiplier
// produces 70-bit complex products (35-bit I and Q).  These widths are the
// ones printed in the paper's beamforming figure; the split of each complex
// width into equal I and Q halves is this design's reading.
//
// Link word.  Every word exchanged between nodes and sent to a recording PC is
// 32 bits: a 4-bit flag field on top and 28 payload bits.  Flag bit 0 marks the
// start of a vector (a 1024-sample block or a 1024-bin spectrum); bits 3:1
// carry the low bits of the vector number so that streams can be checked for
// continuity.  The paper fixes the 4-bit flag and the 32-bit word; the meaning
// given to flag bits 3:1 is this design's choice.
package eta_pkg;

  // Sizes given by the paper.
  localparam int unsigned FFT_N      = 1024;  // FFT points and vector length
  localparam int unsigned FFT_LOG2N  = 10;
  localparam int unsigned N_ANT      = 2;     // antennas per outer node
  localparam int unsigned N_BEAMS    = 8;     // beams formed per outer node
  localparam int unsigned BEAMS_PER_LINK = 4; // beams 1-4 and 5-8
  localparam int unsigned N_LINKS_OUT = 2;    // Aurora links used per outer node
  localparam int unsigned N_INNER_IN = 6;     // outer-node streams per inner node
  localparam int unsigned N_OUTER    = 12;
  localparam int unsigned N_INNER    = 4;

  // Widths (paper's Fig. 7 and Sec. 3.2).
  localparam int unsigned SAMP_W  = 8;    // I or Q of an antenna sample
  localparam int unsigned FFT_W   = 18;   // I or Q of an FFT output
  localparam int unsigned COEF_W  = 16;   // I or Q of a coefficient
  localparam int unsigned PROD_W  = 35;   // I or Q of a complex product
  localparam int unsigned PART_W  = 14;   // I or Q of a partial beam on a link
  localparam int unsigned REC_W   = 7;    // I or Q of a recorded 14-bit sample
  localparam int unsigned WORD_W  = 32;
  localparam int unsigned FLAG_W  = 4;
  localparam int unsigned PAY_W   = WORD_W - FLAG_W;  // 28

  typedef struct packed {
    logic signed [SAMP_W-1:0] re;
    logic signed [SAMP_W-1:0] im;
  } samp_t;

  typedef struct packed {
    logic signed [FFT_W-1:0] re;
    logic signed [FFT_W-1:0] im;
  } fftw_t;

  typedef struct packed {
    logic signed [COEF_W-1:0] re;
    logic signed [COEF_W-1:0] im;
  } coef_t;

  typedef struct packed {
    logic signed [PROD_W-1:0] re;
    logic signed [PROD_W-1:0] im;
  } prod_t;

  typedef struct packed {
    logic [2:0] seq;     // low bits of the vector number
    logic       vstart;  // first word of a vector
  } flag_t;

  typedef struct packed {
    flag_t              flag;
    logic [PAY_W-1:0]   payload;
  } word_t;

  // Operating modes of an outer node's output select and of an inner node.
  typedef enum logic [1:0] {
    MODE_RAW      = 2'd0,   // raw antenna data to the PCs
    MODE_BEAM     = 2'd1,   // time-domain beamforming
    MODE_FFT      = 2'd2,   // per-channel beamforming after a 1024-point FFT
    MODE_LINKTEST = 2'd3    // counter words for link bit-error tests
  } mode_t;

  // Control register map shared by both node types (32-bit registers on the
  // control bus).  Coefficient RAMs sit at COEF_BASE + table*1024 + bin.
  localparam logic [15:0] REG_MODE     = 16'h0000;
  localparam logic [15:0] REG_SHIFT    = 16'h0001;
  localparam logic [15:0] REG_TEST     = 16'h0002;
  localparam logic [15:0] REG_STATUS   = 16'h0003;
  localparam logic [15:0] REG_ERRCNT0  = 16'h0010;  // 0x10.. error counters
  localparam logic [15:0] REG_BINMASK  = 16'h0100;  // 32 words of bin enables
  localparam logic [15:0] COEF_BASE    = 16'h8000;

  // Round a signed value right by sh bits to nearest, ties to even, so that
  // repeated reduction adds no DC bias, then saturate to out_w bits.
  function automatic logic signed [31:0] round_sat(input logic signed [47:0] v,
                                                   input int unsigned sh,
                                                   input int unsigned out_w);
    logic signed [47:0] q, r, half, lim_hi, lim_lo;
    if (sh == 0) begin
      q = v;
    end else begin
      q    = v >>> sh;
      r    = v - (q <<< sh);               // remainder, 0 .. 2^sh-1
      half = 48'sd1 <<< (sh - 1);
      if (r > half || (r == half && q[0])) q = q + 48'sd1;
    end
    lim_hi = (48'sd1 <<< (out_w - 1)) - 48'sd1;
    lim_lo = -(48'sd1 <<< (out_w - 1));
    if (q > lim_hi) q = lim_hi;
    if (q < lim_lo) q = lim_lo;
    return 32'(q);
  endfunction

  // Bit reversal of a 10-bit FFT index.
  function automatic logic [FFT_LOG2N-1:0] bitrev(input logic [FFT_LOG2N-1:0] a);
    for (int i = 0; i < FFT_LOG2N; i++) bitrev[i] = a[FFT_LOG2N-1-i];
  endfunction

endpackage
