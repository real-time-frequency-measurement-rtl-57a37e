// sync_fifo: single-clock first-word-fall-through FIFO used for the frame
// buffers of the parallel-to-serial converter and for caches elsewhere.
//
// The head word is always visible on rd_data while empty is low; rd_en pops it.
// A write into a full FIFO is dropped and sets the sticky overflow flag; a read
// of an empty FIFO is ignored. count gives the number of stored words, which
// the serialisers use to wait for a whole frame. Memory is a plain array, read
// asynchronously, so it maps to distributed RAM (or to block RAM with an output
// register added). Depth must be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          do_wr, do_rd;

  assign empty   = (wptr == rptr);
  assign full    = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign count   = wptr - rptr;
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      if (wr_en && full) overflow <= 1'b1;
    end
  end
endmodule
