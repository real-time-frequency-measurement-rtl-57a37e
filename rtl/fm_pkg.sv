// fm_pkg: shared constants, types and arithmetic helpers of the frequency
// measurement datapath.
//
// The sizes are the ones of the main configuration: 40 input lanes of 12-bit
// samples, 440-point frames, 3 first-stage groups of 8 second-stage subgroups
// (24 serial lanes), a 512-point FFT with 16-bit data and twiddles.
//
// Floating-point values are IEEE-754 single precision (fp32_t). Only what the
// amplitude path needs is provided: unsigned integer to float, float square
// root and float to unsigned fixed point. All of them truncate, treat zero
// specially and never see negative numbers, infinities or NaNs. The choice of
// single precision and of truncation is this design's; the source only says
// that the square root is done in floating point.
package fm_pkg;

  // ---------------- sizes of the main configuration ----------------
  localparam int unsigned ADC_W      = 12;   // S12,0 samples
  localparam int unsigned IN_LANES   = 40;   // parallel lanes from the receiver
  localparam int unsigned MID_LANES  = 8;    // lanes between the two P2S stages
  localparam int unsigned N_GROUPS   = 3;    // first-stage groups
  localparam int unsigned N_SUB      = 8;    // second-stage subgroups per group
  localparam int unsigned FRAME_PTS  = 440;  // samples per frame
  localparam int unsigned FFT_N      = 512;  // FFT length after zero padding
  localparam int unsigned FFT_W      = 16;   // FFT data width
  localparam int unsigned TW_W       = 16;   // twiddle width (Q2.14)
  localparam int unsigned IDX_W      = 16;   // width of a bin index field
  localparam int unsigned FREQ_W     = 16;   // S16,4 frequency result
  localparam int unsigned FREQ_FRAC  = 4;

  typedef logic [31:0] fp32_t;

  // Result of one spectrum unit for one frame: the peak bin x0 and the
  // magnitudes at x0-1, x0, x0+1, all in floating point.
  typedef struct packed {
    fp32_t            ym1;
    fp32_t            y0;
    fp32_t            y1;
    logic [IDX_W-1:0] x0;
  } peak_t;

  // Unsigned integer (up to 48 bits) to fp32, truncating the mantissa.
  function automatic fp32_t u2f(input logic [47:0] v);
    int          p;
    logic [47:0] m;
    p = -1;
    for (int i = 0; i < 48; i++) if (v[i]) p = i;
    if (p < 0) return 32'h0;
    if (p >= 23) m = v >> (p - 23);
    else         m = v << (23 - p);
    return {1'b0, 8'(127 + p), m[22:0]};
  endfunction

  // Integer square root of a 48-bit value, digit by digit (floor).
  function automatic logic [23:0] isqrt48(input logic [47:0] x);
    logic [49:0] r;
    logic [49:0] t;
    logic [23:0] q;
    r = '0;
    q = '0;
    for (int i = 23; i >= 0; i--) begin
      r = (r << 2) | 50'(x[2*i+:2]);
      t = {24'b0, q, 2'b01};
      if (r >= t) begin
        r = r - t;
        q = {q[22:0], 1'b1};
      end else begin
        q = {q[22:0], 1'b0};
      end
    end
    return q;
  endfunction

  // Square root of a non-negative fp32 value (mantissa truncated).
  function automatic fp32_t fsqrt(input fp32_t a);
    int          e;
    logic [47:0] rad;
    logic [23:0] s;
    if (a[30:23] == 8'd0) return 32'h0;
    e = int'(a[30:23]) - 127;
    if (e[0]) begin           // odd exponent: fold one factor 2 into the mantissa
      rad = 48'({1'b1, a[22:0]}) << 24;
      e   = e - 1;
    end else begin
      rad = 48'({1'b1, a[22:0]}) << 23;
    end
    s = isqrt48(rad);         // in [2^23, 2^24)
    return {1'b0, 8'((e >>> 1) + 127), s[22:0]};
  endfunction

  // fp32 to unsigned fixed point with FRAC fraction bits (truncating,
  // saturating at 40 bits).
  function automatic logic [39:0] f2u(input fp32_t a, input int frac);
    int          sh;
    logic [63:0] m;
    if (a[30:23] == 8'd0) return '0;
    sh = int'(a[30:23]) - 127 - 23 + frac;
    m  = 64'({1'b1, a[22:0]});
    if (sh >= 40)      return '1;
    else if (sh >= 0)  m = m << sh;
    else if (sh > -64) m = m >> (-sh);
    else               m = '0;
    if (m[63:40] != '0) return '1;
    return m[39:0];
  endfunction

  // Bit reversal of the low `bits` bits of v.
  function automatic logic [IDX_W-1:0] bitrev(input logic [IDX_W-1:0] v, input int bits);
    logic [IDX_W-1:0] r;
    r = '0;
    for (int i = 0; i < IDX_W; i++) if (i < bits) r[i] = v[bits-1-i];
    return r;
  endfunction

endpackage
