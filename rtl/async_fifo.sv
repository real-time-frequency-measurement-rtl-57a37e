// async_fifo: dual-clock first-word-fall-through FIFO with Gray-coded
// pointers, each synchronised into the other clock domain by two flip-flops.
// It receives the sample lanes in the time-domain path. Writes into a full
// FIFO are dropped and set the sticky overflow flag (write domain). Depth must
// be a power of two. The standard Gray-pointer structure is this design's
// choice; the source only names an asynchronous FIFO.
module async_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic          wr_clk,
  input  logic          wr_rst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  output logic          full,
  output logic          overflow,
  input  logic          rd_clk,
  input  logic          rd_rst_n,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data,
  output logic          empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0]  wbin_n, rbin_n;

  assign wbin_n  = wbin + 1'b1;
  assign rbin_n  = rbin + 1'b1;
  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin_n;
        wgray <= wbin_n ^ (wbin_n >> 1);
      end
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin_n;
        rgray <= rbin_n ^ (rbin_n >> 1);
      end
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("DEPTH must be a power of two >= 4");
endmodule
