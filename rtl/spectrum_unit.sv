// spectrum_unit: one lane of frequency detection (one "FFT channel").
//
// Chain: fft_pad (440 samples + 72 zeros), fft_r2sdf (512-point FFT, natural
// order), mag_calc (|X| in fp32 and fixed point), peak_detect (x0 and the
// magnitudes y-1, y0, y+1). One frame enters as FRAME samples on consecutive
// clocks while in_ready is high; its peak_t result appears once, on out_valid,
// 3N + 14 clocks (1550) after the frame's first sample: 1 (padding) +
// 2N + log2(N) (FFT and reorder) + N - 1 (the remaining bins) + 4 (magnitude)
// + 1 (peak). A unit accepts a new
// frame every N clocks, so 24 units in turn keep up with one frame per
// N/24 = 21.3 clocks. The chain is the source's (Fig. 6).
module spectrum_unit
  import fm_pkg::*;
#(
  parameter int unsigned N     = FFT_N,
  parameter int unsigned FRAME = FRAME_PTS,
  parameter int unsigned LO    = 1,
  parameter int unsigned HI    = FFT_N / 2 - 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ADC_W-1:0] in_data,
  output logic                    in_ready,
  output logic                    out_valid,
  output peak_t                   out_peak
);
  localparam int unsigned MAG_W = 24;

  logic                    pad_v;
  logic signed [FFT_W-1:0] pad_d;
  logic                    fft_v;
  logic [IDX_W-1:0]        fft_idx;
  logic signed [FFT_W-1:0] fft_re, fft_im;
  logic                    mag_v;
  logic [IDX_W-1:0]        mag_idx;
  fp32_t                   mag_f;
  logic [MAG_W-1:0]        mag_fix;

  fft_pad #(.N(N), .FRAME(FRAME)) u_pad (
    .clk, .rst_n, .in_valid, .in_data, .in_ready,
    .out_valid(pad_v), .out_data(pad_d)
  );

  fft_r2sdf #(.N(N)) u_fft (
    .clk, .rst_n, .in_valid(pad_v), .in_re(pad_d),
    .out_valid(fft_v), .out_idx(fft_idx), .out_re(fft_re), .out_im(fft_im)
  );

  mag_calc #(.MAG_FRAC(8), .MAG_W(MAG_W)) u_mag (
    .clk, .rst_n, .in_valid(fft_v), .in_idx(fft_idx), .in_re(fft_re), .in_im(fft_im),
    .out_valid(mag_v), .out_idx(mag_idx), .out_mag_f(mag_f), .out_mag_fix(mag_fix)
  );

  peak_detect #(.N(N), .LO(LO), .HI(HI), .MAG_W(MAG_W)) u_peak (
    .clk, .rst_n, .in_valid(mag_v), .in_idx(mag_idx), .in_mag_f(mag_f), .in_mag_fix(mag_fix),
    .out_valid, .out_peak
  );
endmodule
