// trigger_logic: turns the external trigger into frame-capture windows for the
// first-stage parallel demultiplexer of the P2S converter.
//
// A rising edge of `trigger`, sampled on a beat where in_valid is high, makes
// that beat the first of a frame; the frame is FRAME_BEATS consecutive valid
// beats (440 samples / 40 lanes = 11). cap_valid marks the captured beats,
// cap_group names the first-stage group that receives the frame and cap_last
// marks its final beat. Groups are served in turn 0,1,..,N_GROUPS-1,0,.. so
// successive frames go to successive groups, as the source describes for the
// demultiplexer. A trigger edge seen while a frame is still being captured is
// ignored and counted in missed_triggers. Beats outside a window are dropped.
// Sampling the trigger once per beat and taking the edge beat as beat 0 is
// this design's choice; the source only says that the trigger logic, driven by
// the external trigger, steers the demultiplexer.
module trigger_logic #(
  parameter int unsigned FRAME_BEATS = 11,
  parameter int unsigned N_GROUPS    = 3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          trigger,
  output logic                          cap_valid,
  output logic                          cap_last,
  output logic [$clog2(N_GROUPS)-1:0]   cap_group,
  output logic [31:0]                   frames,
  output logic [15:0]                   missed_triggers
);
  localparam int unsigned BW = $clog2(FRAME_BEATS + 1);
  localparam int unsigned GW = $clog2(N_GROUPS);

  logic          trig_d;
  logic          active;
  logic [BW-1:0] beat;
  logic [GW-1:0] group;
  logic          edge_seen;
  logic          start;

  assign edge_seen = in_valid && trigger && !trig_d;
  assign start     = edge_seen && !active;
  assign cap_valid = in_valid && (active || start);
  assign cap_last  = cap_valid && (start ? (FRAME_BEATS == 1) : (beat == BW'(FRAME_BEATS - 1)));
  assign cap_group = group;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_d          <= 1'b0;
      active          <= 1'b0;
      beat            <= '0;
      group           <= '0;
      frames          <= '0;
      missed_triggers <= '0;
    end else begin
      if (in_valid) trig_d <= trigger;
      if (edge_seen && active) missed_triggers <= missed_triggers + 1'b1;
      if (cap_valid) begin
        if (cap_last) begin
          active <= 1'b0;
          beat   <= '0;
          group  <= (group == GW'(N_GROUPS - 1)) ? '0 : group + 1'b1;
          frames <= frames + 1'b1;
        end else begin
          active <= 1'b1;
          beat   <= start ? BW'(1) : beat + 1'b1;
        end
      end
    end
  end
endmodule
