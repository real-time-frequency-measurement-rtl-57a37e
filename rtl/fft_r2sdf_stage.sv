// fft_r2sdf_stage: one radix-2 single-delay-feedback (R2SDF) butterfly stage
// of a decimation-in-frequency FFT, span 2*L.
//
// A delay memory of L complex words is read and written at the same circular
// address every clock, so a word comes back exactly L clocks after it was
// stored. For the first L samples of each 2L block the input is stored and
// the stage outputs what the memory returns (the rotated differences of the
// previous block). For the second L samples the stage outputs (a+b)/2, where a
// is the stored sample and b the input, and stores (a-b)/2 * W^m with
// W = exp(-j*2*pi/(2L)) and m the position in the half block. While no input
// arrives the stage behaves as in a first half, so the last differences of a
// frame still drain out. Frames must therefore arrive as unbroken runs of
// whole 2L blocks, which fft_pad guarantees. The 1/2 scaling per stage keeps
// the 16-bit words from overflowing. Twiddles are Q2.14, 16 bits, computed at
// elaboration; products are rounded. The valid flags of the delay line are
// kept in a reset register beside the memory, so that after reset no stale
// word is taken for data. Output is registered: one clock latency
// plus the L-clock delay of the structure.
module fft_r2sdf_stage
  import fm_pkg::*;
#(
  parameter int unsigned L = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [FFT_W-1:0] in_re,
  input  logic signed [FFT_W-1:0] in_im,
  output logic                    out_valid,
  output logic signed [FFT_W-1:0] out_re,
  output logic signed [FFT_W-1:0] out_im
);
  localparam int unsigned AW = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned CW = $clog2(2 * L);

  typedef struct packed {
    logic                    v;
    logic signed [FFT_W-1:0] re;
    logic signed [FFT_W-1:0] im;
  } cword_t;

  // Twiddle table: {re, im} of exp(-j*2*pi*m/(2L)), Q2.14.
  function automatic logic [2*TW_W-1:0] twiddle(input int m);
    real ang, c, s;
    int  ci, si;
    ang = 2.0 * 3.14159265358979323846 * real'(m) / real'(2 * L);
    c   = $cos(ang) * 16384.0;
    s   = -$sin(ang) * 16384.0;
    ci  = (c >= 0.0) ? $rtoi(c + 0.5) : -$rtoi(-c + 0.5);
    si  = (s >= 0.0) ? $rtoi(s + 0.5) : -$rtoi(-s + 0.5);
    return {TW_W'(ci), TW_W'(si)};
  endfunction

  logic [2*TW_W-1:0] tw_rom [L];
  for (genvar m = 0; m < L; m++) begin : g_tw
    localparam logic [2*TW_W-1:0] TWV = twiddle(m);
    assign tw_rom[m] = TWV;
  end

  cword_t        mem [L];
  logic [L-1:0]  vmem;           // valid flags of the delay line, reset
  logic [AW-1:0] ptr;
  logic [CW-1:0] cnt;
  cword_t        dly, wr;
  logic          second;
  logic signed [FFT_W:0]   sum_re, sum_im, dif_re, dif_im;
  logic signed [TW_W-1:0]  w_re, w_im;
  logic signed [FFT_W+TW_W+1:0] p_re, p_im;
  logic signed [FFT_W-1:0] d_re, d_im;

  assign dly    = '{v: vmem[ptr], re: mem[ptr].re, im: mem[ptr].im};
  assign second = in_valid && cnt[CW-1];
  assign {w_re, w_im} = tw_rom[cnt[AW-1:0] & AW'(L - 1)];

  always_comb begin
    sum_re = (FFT_W+1)'(dly.re) + (FFT_W+1)'(in_re);
    sum_im = (FFT_W+1)'(dly.im) + (FFT_W+1)'(in_im);
    dif_re = (FFT_W+1)'(dly.re) - (FFT_W+1)'(in_re);
    dif_im = (FFT_W+1)'(dly.im) - (FFT_W+1)'(in_im);
    d_re   = FFT_W'(dif_re >>> 1);
    d_im   = FFT_W'(dif_im >>> 1);
    p_re   = d_re * w_re - d_im * w_im + (1 <<< (14 - 1));
    p_im   = d_re * w_im + d_im * w_re + (1 <<< (14 - 1));
    if (second) begin
      wr.v  = 1'b1;
      wr.re = FFT_W'(p_re >>> 14);
      wr.im = FFT_W'(p_im >>> 14);
    end else begin
      wr.v  = in_valid;
      wr.re = in_re;
      wr.im = in_im;
    end
  end

  always_ff @(posedge clk) begin
    mem[ptr] <= wr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      cnt       <= '0;
      vmem      <= '0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      vmem[ptr] <= wr.v;
      ptr <= (ptr == AW'(L - 1)) ? '0 : ptr + 1'b1;
      if (in_valid) cnt <= cnt + 1'b1;
      if (second) begin
        out_valid <= 1'b1;
        out_re    <= FFT_W'(sum_re >>> 1);
        out_im    <= FFT_W'(sum_im >>> 1);
      end else begin
        out_valid <= dly.v;
        out_re    <= dly.re;
        out_im    <= dly.im;
      end
    end
  end
endmodule
