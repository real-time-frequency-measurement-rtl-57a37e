// p2s_stage2: second stage of the P2S converter for one group.
//
// A Ctrl counter splits the incoming 8-lane slice stream into frames of
// FRAME_SLICES slices (440 / 8 = 55) and the demultiplexer writes frame j of
// the group into subgroup FIFO j mod 8 (FIFOx-1..8, 8 lanes wide, 64 deep: a
// frame needs 55 entries). Each subgroup PISO turns 8-lane words into single
// samples, one per clock. It starts a frame only when the whole frame is in its
// FIFO and its consumer signals out_ready, and then sends all 440 samples on
// consecutive clocks; out_first marks the first. The contiguous frame is what
// the pipelined FFT behind it needs. Lane counts and the FIFO depth are the
// source's (Fig. 5); the counting Ctrl, the whole-frame start rule and the
// ready handshake are this design's choices.
module p2s_stage2
  import fm_pkg::*;
#(
  parameter int unsigned IN_L         = MID_LANES,
  parameter int unsigned SUBS         = N_SUB,
  parameter int unsigned FRAME_SLICES = FRAME_PTS / MID_LANES,
  parameter int unsigned FIFO_DEPTH   = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [IN_L*ADC_W-1:0]         in_data,
  output logic [SUBS-1:0]               out_valid,
  output logic [SUBS-1:0]               out_first,
  output logic [SUBS-1:0][ADC_W-1:0]    out_data,
  input  logic [SUBS-1:0]               out_ready,
  output logic [SUBS-1:0]               overflow
);
  localparam int unsigned CW = $clog2(FRAME_SLICES + 1);
  localparam int unsigned SW = (SUBS > 1) ? $clog2(SUBS) : 1;

  // Ctrl: slice counter and subgroup pointer
  logic [CW-1:0] slice;
  logic [SW-1:0] sub;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slice <= '0;
      sub   <= '0;
    end else if (in_valid) begin
      if (slice == CW'(FRAME_SLICES - 1)) begin
        slice <= '0;
        sub   <= (sub == SW'(SUBS - 1)) ? '0 : sub + 1'b1;
      end else begin
        slice <= slice + 1'b1;
      end
    end
  end

  for (genvar s = 0; s < SUBS; s++) begin : g_sub
    logic [IN_L*ADC_W-1:0]        f_data;
    logic                         f_empty, f_full, f_rd;
    logic [$clog2(FIFO_DEPTH):0]  f_count;
    logic [CW-1:0]                words_sent;
    logic                         in_frame, go, word_last;

    sync_fifo #(.W(IN_L*ADC_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en   (in_valid && (sub == SW'(s))),
      .wr_data (in_data),
      .rd_en   (f_rd),
      .rd_data (f_data),
      .empty   (f_empty),
      .full    (f_full),
      .count   (f_count),
      .overflow(overflow[s])
    );

    // A frame starts only when it is wholly buffered and the consumer is idle.
    assign go = in_frame || (out_ready[s] && (f_count >= ($clog2(FIFO_DEPTH)+1)'(FRAME_SLICES)));

    piso #(.IN_L(IN_L), .OUT_L(1), .W(ADC_W)) u_piso (
      .clk, .rst_n,
      .fifo_data (f_data),
      .fifo_empty(f_empty),
      .fifo_rd   (f_rd),
      .go        (go),
      .out_valid (out_valid[s]),
      .out_data  (out_data[s]),
      .out_word_last(word_last)
    );

    assign out_first[s] = out_valid[s] && !in_frame;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        in_frame   <= 1'b0;
        words_sent <= '0;
      end else begin
        if (out_valid[s]) in_frame <= 1'b1;
        if (word_last) begin
          if (words_sent == CW'(FRAME_SLICES - 1)) begin
            words_sent <= '0;
            in_frame   <= 1'b0;
          end else begin
            words_sent <= words_sent + 1'b1;
          end
        end
      end
    end
  end
endmodule
