// realtime_transfer: the real-time transfer path that carries frequency
// results (or, in oscilloscope mode, samples) from the FPGA to the host.
//
// Two caches in series. The FIFO (xfer_fifo, first level) takes one 16-bit
// word per clock and absorbs the data that arrives while the DDR is busy
// being read. Once it holds a block (BLOCK_PTS words, 80 Ki by default) the
// block is moved into the DDR (second level, 2 GByte) through the SIPO
// (8 -> 40 bytes) and the encoder (40 -> 60 bytes, the DDR word). The DDR
// absorbs host stalls; every FRAME_BLOCKS blocks' worth of data (20) is read
// out as one frame through the output PISO (60 -> 4 bytes) toward the PCIE
// interface, after which the host must signal read_done before the next
// frame. fifo_ctrl, ddr_ctrl and state_ctrl carry the status and command
// signals of the source's transfer diagram. A frame is FRAME_BLOCKS*BLOCK_PTS
// *2/60 whole DDR words; the few bytes beyond a whole word go with the next
// frame, since the DDR holds one continuous byte stream.
// Ports: in_valid/in_data (16 bit, no back-pressure), start_measure and
// read_done from the host, a user-side memory port for the DDR controller IP,
// and a 4-byte valid/ready stream toward the PCIE interface.
module realtime_transfer #(
  parameter int unsigned     BLOCK_PTS    = 81920,
  parameter int unsigned     FRAME_BLOCKS = 20,
  parameter int unsigned     FIFO_DEPTH   = 65536,
  parameter int unsigned     DDR_AW       = 25,
  parameter longint unsigned DDR_DEPTH    = 64'd1 << 25,
  parameter int unsigned     OUT_B        = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [15:0]       in_data,
  input  logic              start_measure,
  input  logic              read_done,
  output logic              mem_wr_en,
  output logic [DDR_AW-1:0] mem_wr_addr,
  output logic [479:0]      mem_wr_data,
  output logic              mem_rd_en,
  output logic [DDR_AW-1:0] mem_rd_addr,
  input  logic              mem_rdy,
  input  logic              mem_rd_valid,
  input  logic [479:0]      mem_rd_data,
  output logic              out_valid,
  output logic [OUT_B*8-1:0] out_data,
  input  logic              out_ready,
  output logic [31:0]       blocks,
  output logic [31:0]       frames,
  output logic [31:0]       catchup_waits,
  output logic              fifo_overflow,
  output logic              ddr_overflow
);
  localparam int unsigned BLOCK_ENTRIES = BLOCK_PTS / 4;
  localparam int unsigned FRAME_WORDS   = int'((longint'(FRAME_BLOCKS) * BLOCK_PTS * 2) / 60);

  logic [63:0]  f_rd_data;
  logic         f_empty, f_prog_full, f_rden;
  logic [$clog2(FIFO_DEPTH):0] f_count;
  logic         s_in_ready, s_out_valid, s_out_ready;
  logic [319:0] s_out_data;
  logic         e_out_valid, e_out_ready, e_busy;
  logic [479:0] e_out_data;
  logic         d_out_valid, p_in_ready;
  logic [479:0] d_out_data;
  logic         rb_ready, rb_done, wb_ready, wb_done, rf_ready, rf_done, wb_start, rf_start;
  logic [DDR_AW:0] used;

  xfer_fifo #(.DEPTH(FIFO_DEPTH), .PROG_FULL(BLOCK_ENTRIES)) u_fifo (
    .clk, .rst_n, .wr_en(in_valid), .wr_data(in_data),
    .rd_en(f_rden), .rd_data(f_rd_data), .empty(f_empty), .prog_full(f_prog_full),
    .count(f_count), .overflow(fifo_overflow)
  );

  fifo_ctrl #(.BLOCK(BLOCK_ENTRIES)) u_fifo_ctrl (
    .clk, .rst_n, .fifo_prog_full(f_prog_full), .fifo_empty(f_empty), .fifo_rden(f_rden),
    .down_ready(s_in_ready), .write_block_ready(wb_ready),
    .read_block_ready(rb_ready), .read_block_done(rb_done)
  );

  xfer_sipo #(.IN_B(8), .OUT_B(40)) u_sipo (
    .clk, .rst_n, .in_valid(f_rden), .in_data(f_rd_data), .in_ready(s_in_ready),
    .out_valid(s_out_valid), .out_data(s_out_data), .out_ready(s_out_ready)
  );

  xfer_encoder #(.IN_B(40), .OUT_B(60)) u_enc (
    .clk, .rst_n, .in_valid(s_out_valid), .in_data(s_out_data), .in_ready(s_out_ready),
    .out_valid(e_out_valid), .out_data(e_out_data), .out_ready(e_out_ready), .busy(e_busy)
  );

  ddr_ctrl #(.WORD_B(60), .AW(DDR_AW), .DEPTH(DDR_DEPTH), .FRAME(FRAME_WORDS)) u_ddr_ctrl (
    .clk, .rst_n,
    .write_block_start(wb_start), .read_frame_start(rf_start),
    .write_block_done(wb_done), .read_frame_ready(rf_ready), .read_frame_done(rf_done),
    .write_block_ready(wb_ready), .block_read_done(rb_done), .pipe_busy(s_out_valid || e_busy),
    .in_valid(e_out_valid), .in_data(e_out_data), .in_ready(e_out_ready),
    .mem_wr_en, .mem_wr_addr, .mem_wr_data, .mem_rd_en, .mem_rd_addr, .mem_rdy,
    .mem_rd_valid, .mem_rd_data,
    .out_valid(d_out_valid), .out_data(d_out_data), .out_ready(p_in_ready),
    .used, .overflow(ddr_overflow)
  );

  state_ctrl u_state (
    .clk, .rst_n, .start_measure, .read_done,
    .read_block_ready(rb_ready), .read_block_done(rb_done), .write_block_done(wb_done),
    .read_frame_ready(rf_ready), .read_frame_done(rf_done),
    .write_block_start(wb_start), .read_frame_start(rf_start),
    .blocks, .frames, .catchup_waits
  );

  xfer_piso #(.IN_B(60), .OUT_B(OUT_B)) u_piso (
    .clk, .rst_n, .in_valid(d_out_valid), .in_data(d_out_data), .in_ready(p_in_ready),
    .out_valid, .out_data, .out_ready
  );

  initial assert (BLOCK_PTS % 4 == 0) else $error("a block must fill whole FIFO entries");
endmodule
