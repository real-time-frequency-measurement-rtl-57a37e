// ddr_ctrl: DDR controller of the real-time transfer path (second-level
// cache), seen from the user side of a memory interface.
//
// The DDR holds a circular stream of 60-byte words. The write address starts
// at 0 and advances with every word written, wrapping after DEPTH words; the
// read address does the same for every word read. The DDR cannot read and
// write at once, so the controller is either writing a block or reading a
// frame:
//  * WriteBlock Start (from the state controller) -> it raises WriteBlock
//    Ready to the FIFO controller and writes every word the encoder offers.
//    When the FIFO controller has read its block (block_read_done) and no
//    whole word is left in the SIPO/encoder (pipe_busy low), it drops
//    WriteBlock Ready and pulses WriteBlock Done. Bytes that do not fill a
//    60-byte word wait in the encoder for the next block.
//  * ReadFrame Start -> it reads FRAME words from the read address and hands
//    them on (out_valid) to the output PISO, issuing one read at a time, when
//    the PISO can take a word; then pulses ReadFrame Done.
// ReadFrame Ready is high while at least FRAME unread words are stored, so a
// read that has caught up with the write address waits for more blocks. A
// word that would overwrite unread data is dropped and sets overflow (with
// 2 GByte this needs a host stall of tens of seconds).
// The address scheme, the wait and the status/command names follow the
// source; one outstanding read, word-granular addresses (one 64-byte slot
// per 60-byte word) and the drop-on-full rule are this design's choices.
// The memory interface is a generic command/data port: a write or read
// command is accepted on a clock where mem_*_en and mem_rdy are both high,
// read data returns later on mem_rd_valid in command order.
module ddr_ctrl #(
  parameter int unsigned WORD_B = 60,
  parameter int unsigned AW     = 25,          // word address width
  parameter longint unsigned DEPTH = 64'd1 << 25, // words (2 GByte / 64 byte)
  parameter int unsigned FRAME  = 54613        // words per frame
) (
  input  logic                clk,
  input  logic                rst_n,
  // state controller
  input  logic                write_block_start,
  input  logic                read_frame_start,
  output logic                write_block_done,
  output logic                read_frame_ready,
  output logic                read_frame_done,
  // FIFO controller / write pipe
  output logic                write_block_ready,
  input  logic                block_read_done,
  input  logic                pipe_busy,
  input  logic                in_valid,
  input  logic [WORD_B*8-1:0] in_data,
  output logic                in_ready,
  // memory interface (user side)
  output logic                mem_wr_en,
  output logic [AW-1:0]       mem_wr_addr,
  output logic [WORD_B*8-1:0] mem_wr_data,
  output logic                mem_rd_en,
  output logic [AW-1:0]       mem_rd_addr,
  input  logic                mem_rdy,
  input  logic                mem_rd_valid,
  input  logic [WORD_B*8-1:0] mem_rd_data,
  // frame data toward the output PISO
  output logic                out_valid,
  output logic [WORD_B*8-1:0] out_data,
  input  logic                out_ready,
  // status
  output logic [AW:0]         used,
  output logic                overflow
);
  typedef enum logic [1:0] {IDLE, WRITE, READ} state_t;
  state_t st;

  logic [AW-1:0]             waddr, raddr;
  logic                      block_read_seen;
  logic                      outstanding;
  logic [$clog2(FRAME+1)-1:0] issued, returned;
  logic                      wr_fire, rd_fire, full;

  assign full              = (used >= (AW+1)'(DEPTH));
  assign write_block_ready = (st == WRITE);
  assign in_ready          = (st == WRITE) && (mem_rdy || full);
  assign wr_fire           = (st == WRITE) && in_valid && mem_rdy && !full;
  assign mem_wr_en         = (st == WRITE) && in_valid && !full;
  assign mem_wr_addr       = waddr;
  assign mem_wr_data       = in_data;
  assign rd_fire           = (st == READ) && !outstanding && out_ready && mem_rdy
                             && (issued != ($clog2(FRAME+1))'(FRAME));
  assign mem_rd_en         = (st == READ) && !outstanding && out_ready
                             && (issued != ($clog2(FRAME+1))'(FRAME));
  assign mem_rd_addr       = raddr;
  assign read_frame_ready  = (used >= (AW+1)'(FRAME));
  assign out_valid         = mem_rd_valid;
  assign out_data          = mem_rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st               <= IDLE;
      waddr            <= '0;
      raddr            <= '0;
      used             <= '0;
      block_read_seen  <= 1'b0;
      outstanding      <= 1'b0;
      issued           <= '0;
      returned         <= '0;
      write_block_done <= 1'b0;
      read_frame_done  <= 1'b0;
      overflow         <= 1'b0;
    end else begin
      write_block_done <= 1'b0;
      read_frame_done  <= 1'b0;
      if (st == WRITE && in_valid && full) overflow <= 1'b1;
      if (wr_fire) waddr <= (AW'(waddr) == AW'(DEPTH - 1)) ? '0 : waddr + 1'b1;
      if (rd_fire) raddr <= (AW'(raddr) == AW'(DEPTH - 1)) ? '0 : raddr + 1'b1;
      used <= used + (AW+1)'(wr_fire) - (AW+1)'(rd_fire);
      unique case (st)
        IDLE: begin
          if (write_block_start) begin
            st              <= WRITE;
            block_read_seen <= 1'b0;
          end else if (read_frame_start) begin
            st       <= READ;
            issued   <= '0;
            returned <= '0;
          end
        end
        WRITE: begin
          if (block_read_done) block_read_seen <= 1'b1;
          if (block_read_seen && !pipe_busy && !in_valid) begin
            st               <= IDLE;
            write_block_done <= 1'b1;
          end
        end
        READ: begin
          if (rd_fire) begin
            issued      <= issued + 1'b1;
            outstanding <= 1'b1;
          end
          if (mem_rd_valid) begin
            outstanding <= 1'b0;
            returned    <= returned + 1'b1;
            if (returned == ($clog2(FRAME+1))'(FRAME - 1)) begin
              st              <= IDLE;
              read_frame_done <= 1'b1;
            end
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  // At most one write or read command at a time, never both.
  assert property (@(posedge clk) disable iff (!rst_n) !(mem_wr_en && mem_rd_en));
endmodule
