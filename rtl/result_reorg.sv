// result_reorg: gathers the peak results of the spectrum units back into frame
// order for the single, shared fitting module.
//
// Each lane's result is held in a register until taken. A pointer visits the
// lanes in turn, 0..LANES-1, waiting at a lane until its result is there, and
// forwards it (one register stage), so results leave in the order the frames
// arrived. A lane that produces a new result while its old one is still
// waiting sets the sticky overflow flag and its old result is overwritten.
// The source only says that the results of the FFT channels are reorganised;
// the round-robin pointer is this design's simplest form of that.
module result_reorg
  import fm_pkg::*;
#(
  parameter int unsigned LANES = N_GROUPS * N_SUB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [LANES-1:0]     in_valid,
  input  peak_t [LANES-1:0]    in_peak,
  output logic                 out_valid,
  output peak_t                out_peak,
  output logic                 overflow
);
  localparam int unsigned PW = (LANES > 1) ? $clog2(LANES) : 1;

  peak_t [LANES-1:0] hold;
  logic  [LANES-1:0] full;
  logic  [PW-1:0]    ptr;
  logic              take;

  assign take = full[ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold      <= '0;
      full      <= '0;
      ptr       <= '0;
      out_valid <= 1'b0;
      out_peak  <= '0;
      overflow  <= 1'b0;
    end else begin
      out_valid <= take;
      if (take) begin
        out_peak  <= hold[ptr];
        full[ptr] <= 1'b0;
        ptr       <= (ptr == PW'(LANES - 1)) ? '0 : ptr + 1'b1;
      end
      for (int i = 0; i < LANES; i++) begin
        if (in_valid[i]) begin
          hold[i] <= in_peak[i];
          full[i] <= 1'b1;
          if (full[i] && !(take && ptr == PW'(i))) overflow <= 1'b1;
        end
      end
    end
  end
endmodule
