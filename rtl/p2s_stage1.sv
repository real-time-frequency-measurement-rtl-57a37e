// p2s_stage1: first stage of the two-stage parallel-to-serial (P2S) converter.
//
// The 40-lane sample bus (one 12-bit sample per lane, lane 0 earliest) is cut
// into frames by trigger_logic. The parallel demultiplexer writes every beat of
// a frame into the frame FIFO of the group the trigger logic names (FIFO1..3,
// 40 lanes wide, 16 deep: a frame needs 11 entries), so successive frames go to
// successive groups. Behind each FIFO a PISO turns each 40-lane word into five
// 8-lane slices, one per clock, which go to the second stage of that group.
// Structure, lane counts and FIFO depth follow the source (Fig. 5 and its
// text); the FIFO flavour (first-word fall-through) and the absence of output
// back-pressure are this design's choices. A frame is 55 output slices; the
// second stage counts them to find frame boundaries. FIFO overflow (frames
// arriving faster than a group drains) is reported, not prevented.
module p2s_stage1
  import fm_pkg::*;
#(
  parameter int unsigned LANES       = IN_LANES,
  parameter int unsigned OUT_LANES   = MID_LANES,
  parameter int unsigned GROUPS      = N_GROUPS,
  parameter int unsigned FRAME_BEATS = FRAME_PTS / IN_LANES,
  parameter int unsigned FIFO_DEPTH  = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [LANES*ADC_W-1:0]            in_data,
  input  logic                              trigger,
  output logic [GROUPS-1:0]                 out_valid,
  output logic [GROUPS-1:0][OUT_LANES*ADC_W-1:0] out_data,
  output logic [31:0]                       frames,
  output logic [15:0]                       missed_triggers,
  output logic [GROUPS-1:0]                 overflow
);
  logic                        cap_valid, cap_last;
  logic [$clog2(GROUPS)-1:0]   cap_group;

  trigger_logic #(.FRAME_BEATS(FRAME_BEATS), .N_GROUPS(GROUPS)) u_trig (
    .clk, .rst_n, .in_valid, .trigger,
    .cap_valid, .cap_last, .cap_group, .frames, .missed_triggers
  );

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    logic [LANES*ADC_W-1:0] f_data;
    logic                   f_empty, f_full, f_rd;
    logic [$clog2(FIFO_DEPTH):0] f_count;
    logic                   unused_last;

    sync_fifo #(.W(LANES*ADC_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en   (cap_valid && (cap_group == g)),
      .wr_data (in_data),
      .rd_en   (f_rd),
      .rd_data (f_data),
      .empty   (f_empty),
      .full    (f_full),
      .count   (f_count),
      .overflow(overflow[g])
    );

    piso #(.IN_L(LANES), .OUT_L(OUT_LANES), .W(ADC_W)) u_piso (
      .clk, .rst_n,
      .fifo_data (f_data),
      .fifo_empty(f_empty),
      .fifo_rd   (f_rd),
      .go        (1'b1),
      .out_valid (out_valid[g]),
      .out_data  (out_data[g]),
      .out_word_last(unused_last)
    );
  end
endmodule
