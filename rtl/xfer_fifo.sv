// xfer_fifo: first-level cache of the real-time transfer path.
//
// Frequency results (16 bits, "2" byte lanes in the source's transfer
// diagram) are written one per clock; four of them, first in the low bits, are
// packed into one 64-bit entry ("8" byte lanes), which is what the read side
// delivers, first-word fall-through. prog_full rises when at least PROG_FULL
// entries (one block: 80 Ki points = 20480 entries) are stored; this is the
// "FIFO ProgFull" the FIFO controller watches. A write that finds the memory
// full is lost and sets overflow. The default depth, 65536 entries (512 KiB),
// is the smallest power of two above the 440 kByte the source asks for; the
// asymmetric write/read widths follow the source's diagram, the packing order
// is this design's choice. Partial groups of fewer than four results stay in
// the packer until completed.
module xfer_fifo #(
  parameter int unsigned DEPTH     = 65536,
  parameter int unsigned PROG_FULL = 20480
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [15:0]               wr_data,
  input  logic                      rd_en,
  output logic [63:0]               rd_data,
  output logic                      empty,
  output logic                      prog_full,
  output logic [$clog2(DEPTH):0]    count,
  output logic                      overflow
);
  logic [47:0] pack;
  logic [1:0]  npack;
  logic        full;

  sync_fifo #(.W(64), .DEPTH(DEPTH)) u_mem (
    .clk, .rst_n,
    .wr_en   (wr_en && npack == 2'd3),
    .wr_data ({wr_data, pack}),
    .rd_en, .rd_data, .empty, .full, .count, .overflow
  );

  assign prog_full = count >= ($clog2(DEPTH)+1)'(PROG_FULL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pack  <= '0;
      npack <= '0;
    end else if (wr_en) begin
      pack  <= {wr_data, pack[47:16]};
      npack <= npack + 1'b1;
    end
  end
endmodule
