// mag_calc: amplitude calculation of one spectrum unit.
//
// For every FFT bin it forms |X| = sqrt(re^2 + im^2) in the order the source
// describes: two squarers and an adder in integer arithmetic, conversion of
// the 33-bit sum to floating point, and a floating-point square root. The
// magnitude leaves both as fp32 (mag_f, kept for the fitting module) and
// converted back to unsigned fixed point with MAG_FRAC fraction bits
// (mag_fix, used by the peak comparator, since integer comparison is cheaper).
// Four register stages: square, sum and convert, square root, back to fixed.
// The bin index travels alongside. fp32 and truncating conversions are this
// design's choices (see fm_pkg).
module mag_calc
  import fm_pkg::*;
#(
  parameter int unsigned MAG_FRAC = 8,
  parameter int unsigned MAG_W    = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [IDX_W-1:0]        in_idx,
  input  logic signed [FFT_W-1:0] in_re,
  input  logic signed [FFT_W-1:0] in_im,
  output logic                    out_valid,
  output logic [IDX_W-1:0]        out_idx,
  output fp32_t                   out_mag_f,
  output logic [MAG_W-1:0]        out_mag_fix
);
  logic [3:0]              v;
  logic [IDX_W-1:0]        idx [4];
  logic [2*FFT_W-1:0]      sq_re, sq_im;
  fp32_t                   pw_f, mag_f1;
  logic [39:0]             fix;

  assign fix = f2u(mag_f1, MAG_FRAC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v           <= '0;
      sq_re       <= '0;
      sq_im       <= '0;
      pw_f        <= '0;
      mag_f1      <= '0;
      out_mag_f   <= '0;
      out_mag_fix <= '0;
      for (int i = 0; i < 4; i++) idx[i] <= '0;
    end else begin
      v      <= {v[2:0], in_valid};
      idx[0] <= in_idx;
      for (int i = 1; i < 4; i++) idx[i] <= idx[i-1];
      // stage 1: squares
      sq_re  <= (2*FFT_W)'(in_re * in_re);
      sq_im  <= (2*FFT_W)'(in_im * in_im);
      // stage 2: sum, to floating point
      pw_f   <= u2f(48'(sq_re) + 48'(sq_im));
      // stage 3: square root
      mag_f1 <= fsqrt(pw_f);
      // stage 4: fixed-point copy for the comparator
      out_mag_f   <= mag_f1;
      out_mag_fix <= (fix[39:MAG_W] != '0) ? '1 : fix[MAG_W-1:0];
    end
  end

  assign out_valid = v[3];
  assign out_idx   = idx[3];
endmodule
