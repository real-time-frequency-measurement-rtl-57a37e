// state_ctrl: state controller of the real-time transfer path.
//
// After Start Measure it loops over the transfer steps of the source's control
// flow: whenever the FIFO holds a block (ReadBlock Ready) it issues WriteBlock
// Start and waits for both ReadBlock Done (FIFO side) and WriteBlock Done (DDR
// side); otherwise, when the DDR holds a frame (ReadFrame Ready) and the host
// has taken the previous frame (Read Done), it issues ReadFrame Start and
// waits for ReadFrame Done. Block moves come first so the FIFO never waits
// behind a frame that is ready. When the host has fallen behind, frames are
// read back to back as soon as each Read Done arrives, until the read address
// has caught up. Counters report blocks moved, frames read and the number of
// times a frame read was due (host free) but the DDR held less than a frame.
// The inputs and outputs are the source's; the priority rule and the use of
// Read Done as "host buffer free" are this design's choices.
module state_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_measure,
  input  logic        read_done,
  input  logic        read_block_ready,
  input  logic        read_block_done,
  input  logic        write_block_done,
  input  logic        read_frame_ready,
  input  logic        read_frame_done,
  output logic        write_block_start,
  output logic        read_frame_start,
  output logic [31:0] blocks,
  output logic [31:0] frames,
  output logic [31:0] catchup_waits
);
  typedef enum logic [1:0] {IDLE, CHECK, WR_BLOCK, RD_FRAME} state_t;
  state_t st;
  logic   host_free, fifo_done, ddr_done, waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st                <= IDLE;
      host_free         <= 1'b1;
      fifo_done         <= 1'b0;
      ddr_done          <= 1'b0;
      waiting           <= 1'b0;
      write_block_start <= 1'b0;
      read_frame_start  <= 1'b0;
      blocks            <= '0;
      frames            <= '0;
      catchup_waits     <= '0;
    end else begin
      write_block_start <= 1'b0;
      read_frame_start  <= 1'b0;
      if (read_done) host_free <= 1'b1;
      unique case (st)
        IDLE: if (start_measure) st <= CHECK;
        CHECK: begin
          if (read_block_ready) begin
            write_block_start <= 1'b1;
            fifo_done         <= 1'b0;
            ddr_done          <= 1'b0;
            waiting           <= 1'b0;
            st                <= WR_BLOCK;
          end else if (host_free && read_frame_ready) begin
            read_frame_start <= 1'b1;
            host_free        <= 1'b0;
            waiting          <= 1'b0;
            st               <= RD_FRAME;
          end else if (host_free && !waiting) begin
            waiting       <= 1'b1;
            catchup_waits <= catchup_waits + 1'b1;
          end
        end
        WR_BLOCK: begin
          if (read_block_done)  fifo_done <= 1'b1;
          if (write_block_done) ddr_done  <= 1'b1;
          if ((fifo_done || read_block_done) && (ddr_done || write_block_done)) begin
            blocks <= blocks + 1'b1;
            st     <= CHECK;
          end
        end
        RD_FRAME: if (read_frame_done) begin
          frames <= frames + 1'b1;
          st     <= CHECK;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
