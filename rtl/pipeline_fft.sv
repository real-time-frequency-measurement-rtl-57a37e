// pipeline_fft: the bank of spectrum units that works on successive frames.
//
// LANES (24) spectrum_unit instances side by side, lane i fed by serial lane
// i of the P2S converter. Because the P2S hands frame k to lane k mod 24,
// the units take frames in turn, each needing N = 512 clocks per frame, so the
// bank sustains one frame per N/LANES clocks (21.3 clocks, 11.7 MHz frame rate
// at 250 MHz). Results leave per lane on out_valid[i]/out_peak[i]; result_reorg
// puts them back in frame order. Count and arrangement follow the source.
module pipeline_fft
  import fm_pkg::*;
#(
  parameter int unsigned LANES = N_GROUPS * N_SUB,
  parameter int unsigned N     = FFT_N,
  parameter int unsigned FRAME = FRAME_PTS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [LANES-1:0]              in_valid,
  input  logic [LANES-1:0][ADC_W-1:0]   in_data,
  output logic [LANES-1:0]              in_ready,
  output logic [LANES-1:0]              out_valid,
  output peak_t [LANES-1:0]             out_peak
);
  for (genvar i = 0; i < LANES; i++) begin : g_unit
    spectrum_unit #(.N(N), .FRAME(FRAME), .LO(1), .HI(N / 2 - 1)) u_unit (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_data  (in_data[i]),
      .in_ready (in_ready[i]),
      .out_valid(out_valid[i]),
      .out_peak (out_peak[i])
    );
  end
endmodule
