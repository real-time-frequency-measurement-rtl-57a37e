// fifo_ctrl: FIFO controller of the real-time transfer path.
//
// It reports "ReadBlock Ready" to the state controller while the FIFO holds
// at least one block (the FIFO's programmable-full flag). When the DDR
// controller raises "WriteBlock Ready" it reads exactly BLOCK entries out of
// the FIFO (RDEN), one per clock whenever the FIFO has data and the SIPO
// behind it can take a word, then pulses "ReadBlock Done" and waits for
// WriteBlock Ready to fall before it can start another block. The signal
// names are those of the source's transfer diagram; the handshake details are
// this design's.
module fifo_ctrl #(
  parameter int unsigned BLOCK = 20480
) (
  input  logic clk,
  input  logic rst_n,
  input  logic fifo_prog_full,
  input  logic fifo_empty,
  output logic fifo_rden,
  input  logic down_ready,
  input  logic write_block_ready,
  output logic read_block_ready,
  output logic read_block_done
);
  typedef enum logic [1:0] {IDLE, READ, WAIT_LOW} state_t;
  state_t st;
  logic [$clog2(BLOCK+1)-1:0] n;

  assign read_block_ready = fifo_prog_full;
  assign fifo_rden        = (st == READ) && !fifo_empty && down_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st              <= IDLE;
      n               <= '0;
      read_block_done <= 1'b0;
    end else begin
      read_block_done <= 1'b0;
      unique case (st)
        IDLE:     if (write_block_ready) begin st <= READ; n <= '0; end
        READ:     if (fifo_rden) begin
                    n <= n + 1'b1;
                    if (n == ($clog2(BLOCK+1))'(BLOCK - 1)) begin
                      st              <= WAIT_LOW;
                      read_block_done <= 1'b1;
                    end
                  end
        WAIT_LOW: if (!write_block_ready) st <= IDLE;
        default:  st <= IDLE;
      endcase
    end
  end
endmodule
