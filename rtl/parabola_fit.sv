// parabola_fit: parabolic interpolation of the spectral peak and conversion of
// the fitted bin to a frequency.
//
// Through the three points (x0-1, y-1), (x0, y0), (x0+1, y+1) a parabola
// y = a x'^2 + b x' + c, x' = x - x0, has 2a = y+1 + y-1 - 2 y0 and
// b = (y+1 - y-1)/2, and its vertex lies at
//     xc = x0 - b/(2a) = x0 + (y+1 - y-1) / (2 (2 y0 - y+1 - y-1)).
// The datapath is the one of the source's fitting diagram: one adder forms
// y+1 - y-1 and is halved, one forms y+1 + y-1, y0 is doubled and subtracted,
// the ratio is taken and subtracted from x0. The source's printed closed form
// (its eq. for xc, which omits the halving and subtracts 2 y0 in the
// numerator) does not follow from its own a and b; the diagram and the
// derivation are followed here. A final multiplier scales xc by the bin
// width Fs/N: out = xc * BIN_MULT, signed 16 bits with 4 fraction bits
// (S16,4, as in the source).
//
// The three magnitudes come in as fp32. They are first aligned to the largest
// of their exponents, giving 24-bit integers with a common scale (the ratio
// does not depend on the scale), and the rest is fixed point; the offset is
// computed to F = 12 fraction bits and limited to +-1 bin. A flat peak
// (2 y0 = y+1 + y-1) gives offset 0. Using fixed point after alignment, the
// restoring divider and the output unit are this design's choices. The output
// unit is BIN_WIDTH / BIN_MULT; with the default BIN_MULT = 10 and a 20 MHz
// bin (10 GSPS / 512, rounded as in the source) one unit is 2 MHz, so 4 GHz
// reads as 2000.0 and fits S16,4, whose range a 1 MHz unit would exceed.
// Five register stages, one result per clock, out_valid 5 clocks after
// in_valid.
module parabola_fit
  import fm_pkg::*;
#(
  parameter int unsigned F        = 12,
  parameter int unsigned BIN_MULT = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  peak_t                    in_peak,
  output logic                     out_valid,
  output logic signed [FREQ_W-1:0] out_freq,
  output logic signed [IDX_W+F:0]  out_xc      // fitted bin, F fraction bits
);
  localparam int unsigned NW = 26 + F;   // dividend width
  localparam int unsigned DW = 27;       // divisor width

  function automatic logic [23:0] align(input fp32_t y, input logic [7:0] emax);
    logic [7:0] d;
    if (y[30:23] == 8'd0) return '0;
    d = emax - y[30:23];
    if (d > 8'd23) return '0;
    return {1'b1, y[22:0]} >> d;
  endfunction

  function automatic logic [NW-1:0] udiv(input logic [NW-1:0] num, input logic [DW-1:0] den);
    logic [DW:0]   r;
    logic [NW-1:0] q;
    r = '0;
    q = '0;
    for (int i = NW - 1; i >= 0; i--) begin
      r = {r[DW-1:0], num[i]};
      if (r >= {1'b0, den}) begin
        r    = r - {1'b0, den};
        q[i] = 1'b1;
      end
    end
    return q;
  endfunction

  // stage 1
  logic [23:0]       s1_m1, s1_0, s1_p1;
  logic [IDX_W-1:0]  s1_x0;
  // stage 2
  logic signed [25:0] s2_n;      // y+1 - y-1
  logic signed [26:0] s2_d;      // 2 y0 - y+1 - y-1  (= -2a)
  logic [IDX_W-1:0]   s2_x0;
  // stage 3
  logic signed [F+1:0] s3_off;   // offset in bins, F fraction bits
  logic [IDX_W-1:0]    s3_x0;
  // stage 4
  logic signed [IDX_W+F:0] s4_xc;
  logic [4:0] v;

  logic [7:0] emax;
  logic [NW-1:0] q;
  logic [25:0]   n_abs;

  always_comb begin
    emax = in_peak.y0[30:23];
    if (in_peak.ym1[30:23] > emax) emax = in_peak.ym1[30:23];
    if (in_peak.y1[30:23]  > emax) emax = in_peak.y1[30:23];
    n_abs = s2_n[25] ? 26'(-s2_n) : 26'(s2_n);
    // |offset| = |n| / (2 d)
    q = (s2_d > 0) ? udiv(NW'(n_abs) << F, DW'(s2_d) << 1) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      s1_m1 <= '0; s1_0 <= '0; s1_p1 <= '0; s1_x0 <= '0;
      s2_n <= '0; s2_d <= '0; s2_x0 <= '0;
      s3_off <= '0; s3_x0 <= '0;
      s4_xc <= '0;
      out_freq <= '0;
      out_xc   <= '0;
    end else begin
      v <= {v[3:0], in_valid};
      // 1: align the three magnitudes to a common exponent
      s1_m1 <= align(in_peak.ym1, emax);
      s1_0  <= align(in_peak.y0,  emax);
      s1_p1 <= align(in_peak.y1,  emax);
      s1_x0 <= in_peak.x0;
      // 2: adders
      s2_n  <= 26'(s1_p1) - 26'(s1_m1);
      s2_d  <= (27'(s1_0) <<< 1) - 27'(s1_p1) - 27'(s1_m1);
      s2_x0 <= s1_x0;
      // 3: ratio, limited to one bin
      if (q > NW'(1 << F)) s3_off <= s2_n[25] ? -(F+2)'(1 << F) : (F+2)'(1 << F);
      else                 s3_off <= s2_n[25] ? -(F+2)'(q)      : (F+2)'(q);
      s3_x0 <= s2_x0;
      // 4: shift back by x0
      s4_xc <= $signed({1'b0, s3_x0, F'(0)}) + (IDX_W+F+1)'(s3_off);
      // 5: scale to frequency, S16,4 with saturation
      out_xc <= s4_xc;
      out_freq <= sat_freq(s4_xc);
    end
  end

  function automatic logic signed [FREQ_W-1:0] sat_freq(input logic signed [IDX_W+F:0] xc);
    logic signed [IDX_W+F+16:0] p;
    p = (xc * $signed({1'b0, 15'(BIN_MULT)})) >>> (F - FREQ_FRAC);
    if (p > (IDX_W+F+17)'(32767))       return 16'sh7fff;
    else if (p < -(IDX_W+F+17)'(32768)) return 16'sh8000;
    return FREQ_W'(p);
  endfunction

  assign out_valid = v[4];
endmodule
