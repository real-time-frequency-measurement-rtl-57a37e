// p2s_two_stage: the two-stage parallel-to-serial converter (P2S).
//
// It turns the 40-lane sample bus into 24 serial frame streams, one per
// spectrum unit, in two steps: p2s_stage1 spreads frames over 3 groups and
// narrows them to 8 lanes, and one p2s_stage2 per group spreads the group's
// frames over 8 subgroups and narrows them to one sample per clock. Frame k
// (counted from reset) reaches serial lane (k/3 mod 8)*3 + k mod 3, which is
// k mod 24, so the lanes are visited in frame order. Splitting the 40-to-24
// distribution into 3x8 keeps the demultiplexer fan-out and the FIFO count low,
// which is the point of the structure in the source (Fig. 5). Each serial lane
// carries a whole frame on consecutive clocks once its consumer is ready; see
// p2s_stage2. The lane numbering is this design's choice.
module p2s_two_stage
  import fm_pkg::*;
#(
  parameter int unsigned LANES     = IN_LANES,
  parameter int unsigned MID_L     = MID_LANES,
  parameter int unsigned GROUPS    = N_GROUPS,
  parameter int unsigned SUBS      = N_SUB,
  parameter int unsigned FRAME     = FRAME_PTS,
  parameter int unsigned FIFO1_DEPTH = 16,
  parameter int unsigned FIFO2_DEPTH = 64
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic [LANES*ADC_W-1:0]              in_data,
  input  logic                                trigger,
  output logic [GROUPS*SUBS-1:0]              out_valid,
  output logic [GROUPS*SUBS-1:0]              out_first,
  output logic [GROUPS*SUBS-1:0][ADC_W-1:0]   out_data,
  input  logic [GROUPS*SUBS-1:0]              out_ready,
  output logic [31:0]                         frames,
  output logic [15:0]                         missed_triggers,
  output logic                                overflow
);
  logic [GROUPS-1:0]                     s1_valid;
  logic [GROUPS-1:0][MID_L*ADC_W-1:0]    s1_data;
  logic [GROUPS-1:0]                     s1_ovf;
  logic [GROUPS-1:0][SUBS-1:0]           s2_ovf;

  p2s_stage1 #(
    .LANES(LANES), .OUT_LANES(MID_L), .GROUPS(GROUPS),
    .FRAME_BEATS(FRAME / LANES), .FIFO_DEPTH(FIFO1_DEPTH)
  ) u_s1 (
    .clk, .rst_n, .in_valid, .in_data, .trigger,
    .out_valid(s1_valid), .out_data(s1_data),
    .frames, .missed_triggers, .overflow(s1_ovf)
  );

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    logic [SUBS-1:0]             v, f, r;
    logic [SUBS-1:0][ADC_W-1:0]  d;

    for (genvar s = 0; s < SUBS; s++) begin : g_map
      assign out_valid[s*GROUPS+g] = v[s];
      assign out_first[s*GROUPS+g] = f[s];
      assign out_data [s*GROUPS+g] = d[s];
      assign r[s]                  = out_ready[s*GROUPS+g];
    end

    p2s_stage2 #(
      .IN_L(MID_L), .SUBS(SUBS), .FRAME_SLICES(FRAME / MID_L), .FIFO_DEPTH(FIFO2_DEPTH)
    ) u_s2 (
      .clk, .rst_n,
      .in_valid(s1_valid[g]), .in_data(s1_data[g]),
      .out_valid(v), .out_first(f), .out_data(d), .out_ready(r),
      .overflow(s2_ovf[g])
    );
  end

  assign overflow = (|s1_ovf) || (|s2_ovf);

  initial begin
    assert (FRAME % LANES == 0) else $error("frame must be a whole number of input beats");
    assert (FRAME % MID_L == 0) else $error("frame must be a whole number of mid slices");
  end
endmodule
