// peak_detect: main-frequency detection of one spectrum unit.
//
// Bins arrive in natural order 0..N-1 with their magnitude in fixed point (for
// comparison) and in fp32 (for output). Within the search range LO..HI the
// comparator keeps the largest fixed-point magnitude; the first of equal
// maxima wins. Whenever the maximum is replaced, the bin index becomes x0, its
// fp32 magnitude y0, the magnitude of the bin just before becomes y-1 and the
// next bin's magnitude is captured as y+1 on the following clock. This is the
// register-pair scheme of the source. After bin N-1 the result {y-1, y0, y+1,
// x0} is presented for one clock (out_valid), one clock after the last bin.
// The search range is this design's choice: bins 1..N/2-1 cover the positive
// frequencies of a real signal and leave out DC; HI <= N-2 and LO >= 1 keep
// both neighbours inside the frame.
module peak_detect
  import fm_pkg::*;
#(
  parameter int unsigned N     = FFT_N,
  parameter int unsigned LO    = 1,
  parameter int unsigned HI    = FFT_N / 2 - 1,
  parameter int unsigned MAG_W = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [IDX_W-1:0]   in_idx,
  input  fp32_t              in_mag_f,
  input  logic [MAG_W-1:0]   in_mag_fix,
  output logic               out_valid,
  output peak_t              out_peak
);
  fp32_t            prev_f;
  fp32_t            ym1, y0, y1;
  logic [IDX_W-1:0] x0;
  logic [MAG_W-1:0] best;
  logic             grab_next;
  logic             in_range, better;

  assign in_range = (in_idx >= IDX_W'(LO)) && (in_idx <= IDX_W'(HI));
  assign better   = in_range && ((in_idx == IDX_W'(LO)) || (in_mag_fix > best));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_f    <= '0;
      ym1       <= '0;
      y0        <= '0;
      y1        <= '0;
      x0        <= '0;
      best      <= '0;
      grab_next <= 1'b0;
      out_valid <= 1'b0;
      out_peak  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        prev_f <= in_mag_f;
        if (grab_next) begin
          y1        <= in_mag_f;
          grab_next <= 1'b0;
        end
        if (better) begin
          best      <= in_mag_fix;
          y0        <= in_mag_f;
          ym1       <= prev_f;
          x0        <= in_idx;
          grab_next <= 1'b1;
        end
        if (in_idx == IDX_W'(N - 1)) begin
          out_valid    <= 1'b1;
          out_peak.ym1 <= ym1;
          out_peak.y0  <= y0;
          out_peak.y1  <= grab_next ? in_mag_f : y1;
          out_peak.x0  <= x0;
        end
      end
    end
  end

  initial assert (LO >= 1 && HI <= N - 2 && LO <= HI) else $error("bad search range");
endmodule
