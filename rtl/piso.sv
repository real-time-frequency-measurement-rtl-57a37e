// piso: parallel-in serial-out converter that reads words from the head of a
// first-word-fall-through FIFO and emits each as IN_L/OUT_L slices of OUT_L
// lanes, lowest lanes (earliest samples) first, one slice per clock.
//
// A new word is begun only while `go` is high; once begun, a word is always
// finished. fifo_rd pops the word together with its last slice. The slice is
// taken straight from the FIFO head, so out_valid/out_data follow the FIFO
// with no added latency. There is no back-pressure on the output: the
// consumer of a P2S lane takes one slice per clock.
module piso #(
  parameter int unsigned IN_L  = 40,
  parameter int unsigned OUT_L = 8,
  parameter int unsigned W     = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [IN_L*W-1:0]    fifo_data,
  input  logic                 fifo_empty,
  output logic                 fifo_rd,
  input  logic                 go,
  output logic                 out_valid,
  output logic [OUT_L*W-1:0]   out_data,
  output logic                 out_word_last
);
  localparam int unsigned R  = IN_L / OUT_L;
  localparam int unsigned SW = (R > 1) ? $clog2(R) : 1;

  logic [SW-1:0] s;

  assign out_valid     = !fifo_empty && ((s != '0) || go);
  assign out_data      = fifo_data[s*OUT_L*W +: OUT_L*W];
  assign out_word_last = out_valid && (s == SW'(R - 1));
  assign fifo_rd       = out_word_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              s <= '0;
    else if (out_word_last)  s <= '0;
    else if (out_valid)      s <= s + 1'b1;
  end

  initial assert (IN_L % OUT_L == 0) else $error("IN_L must be a multiple of OUT_L");
endmodule
