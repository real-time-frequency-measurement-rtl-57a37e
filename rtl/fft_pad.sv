// fft_pad: zero padding in front of the FFT of one spectrum unit.
//
// It passes the FRAME samples of a frame (S12,0) to the FFT and then appends
// N-FRAME zeros (72 for 440 -> 512), so the FFT always sees N consecutive
// samples. Zero is the pad value because it adds no DC offset, as the source
// says. While padding, in_ready is low so the next frame waits. Samples are
// widened to the FFT's 16 bits with three fraction guard bits (x << 3): the
// FFT scales by 1/2 per stage, so the guard bits keep small signals from being
// truncated away; the scaling is this design's choice. Output timing: one
// clock after the input (registered).
module fft_pad
  import fm_pkg::*;
#(
  parameter int unsigned N     = FFT_N,
  parameter int unsigned FRAME = FRAME_PTS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ADC_W-1:0]  in_data,
  output logic                     in_ready,
  output logic                     out_valid,
  output logic signed [FFT_W-1:0]  out_data
);
  localparam int unsigned CW = $clog2(N);

  logic [CW-1:0] cnt;        // position in the N-point frame
  logic          padding;

  assign in_ready = !padding;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      padding   <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (padding) begin
        out_valid <= 1'b1;
        out_data  <= '0;
        cnt       <= cnt + 1'b1;
        if (cnt == CW'(N - 1)) padding <= 1'b0;
      end else if (in_valid) begin
        out_valid <= 1'b1;
        out_data  <= FFT_W'(signed'(in_data)) <<< 3;
        cnt       <= cnt + 1'b1;
        if (cnt == CW'(FRAME - 1)) padding <= 1'b1;
      end
    end
  end

  initial assert (FRAME < N && FFT_W >= ADC_W + 4) else $error("bad pad sizes");
endmodule
