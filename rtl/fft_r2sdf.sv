// fft_r2sdf: N-point radix-2 pipelined FFT (single-delay feedback), natural
// order output.
//
// log2(N) fft_r2sdf_stage instances with spans N, N/2, .., 2 compute a
// decimation-in-frequency FFT of a real input (imaginary part zero) at one
// sample per clock. Each stage halves its result, so the output is
// X[k]/N. The pipeline emits the bins in bit-reversed order; a ping-pong
// reorder memory (2 x N complex words) writes them at bit-reversed addresses
// and reads them back in order 0..N-1, giving natural order with out_idx = k.
// A frame must arrive as N samples on consecutive clocks; frames may follow
// each other back to back. Latency from the first input sample to bin 0 is
// N-1 (butterfly delays) + log2(N) (stage registers) + N (reorder) + 1 clocks;
// one frame's bins leave on N consecutive clocks. The source gives the
// radix-2 pipeline, the 16-bit data and twiddle widths and N = 512; the
// delay-feedback form, the 1/2-per-stage scaling and the reorder memory are
// this design's choices.
module fft_r2sdf
  import fm_pkg::*;
#(
  parameter int unsigned N = FFT_N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [FFT_W-1:0] in_re,
  output logic                    out_valid,
  output logic [IDX_W-1:0]        out_idx,
  output logic signed [FFT_W-1:0] out_re,
  output logic signed [FFT_W-1:0] out_im
);
  localparam int unsigned S  = $clog2(N);

  logic                    v  [S+1];
  logic signed [FFT_W-1:0] re [S+1];
  logic signed [FFT_W-1:0] im [S+1];

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = '0;

  for (genvar s = 0; s < S; s++) begin : g_st
    fft_r2sdf_stage #(.L(N >> (s + 1))) u_st (
      .clk, .rst_n,
      .in_valid(v[s]), .in_re(re[s]), .in_im(im[s]),
      .out_valid(v[s+1]), .out_re(re[s+1]), .out_im(im[s+1])
    );
  end

  // ---------------- bit-reverse reorder, ping-pong ----------------
  logic [2*FFT_W-1:0] rbuf [2][N];
  logic [S-1:0]       wcnt, rcnt;
  logic               wbank, rbank, reading;
  logic [1:0]         full;

  always_ff @(posedge clk) begin
    if (v[S]) rbuf[wbank][S'(bitrev(IDX_W'(wcnt), S))] <= {re[S], im[S]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt      <= '0;
      rcnt      <= '0;
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      reading   <= 1'b0;
      full      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      logic [1:0] full_n;
      full_n = full;
      if (v[S]) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == S'(N - 1)) begin
          full_n[wbank] = 1'b1;
          wbank <= !wbank;
        end
      end
      out_valid <= 1'b0;
      if (reading || full[rbank]) begin
        reading   <= 1'b1;
        out_valid <= 1'b1;
        out_idx   <= IDX_W'(rcnt);
        {out_re, out_im} <= rbuf[rbank][rcnt];
        rcnt      <= rcnt + 1'b1;
        if (rcnt == S'(N - 1)) begin
          reading        <= 1'b0;
          full_n[rbank]  = 1'b0;
          rbank          <= !rbank;
        end
      end
      full <= full_n;
    end
  end
endmodule
