// time_domain_path: the oscilloscope (time-domain) path of a signal
// processing module.
//
// Beats of the 40-lane sample bus that the capture input selects (the trigger
// module that drives it is outside this design) enter an asynchronous FIFO in
// the receiver clock domain. On the processing clock a PISO serialises each
// 40-lane word to one sample per clock, lane 0 first; the decimator keeps one
// sample in every `decim` (1 keeps all, set by the host for the time
// resolution it wants); the kept samples, sign-extended to 16 bits, are cached
// in a synchronous FIFO and leave on a valid/ready stream toward the path
// multiplexer. When the output FIFO has no room for a whole word the PISO waits, so
// back-pressure reaches the asynchronous FIFO, which then drops new beats
// (overflow). The chain of blocks is the source's; their sizes (16-entry
// asynchronous FIFO, 1024-entry output FIFO, 16-bit decimation factor) and
// the drop-when-full rule are this design's choices.
module time_domain_path
  import fm_pkg::*;
#(
  parameter int unsigned LANES      = IN_LANES,
  parameter int unsigned AFIFO_DEPTH = 16,
  parameter int unsigned OFIFO_DEPTH = 1024
) (
  input  logic                    rx_clk,
  input  logic                    rx_rst_n,
  input  logic                    in_valid,
  input  logic [LANES*ADC_W-1:0]  in_data,
  input  logic                    capture,
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             decim,
  output logic                    out_valid,
  output logic [15:0]             out_data,
  input  logic                    out_ready,
  output logic                    overflow
);
  logic [LANES*ADC_W-1:0] a_data;
  logic                   a_empty, a_full, a_rd, a_ovf;
  logic                   p_valid, p_last;
  logic [ADC_W-1:0]       p_data;
  logic [15:0]            phase;
  logic                   keep;
  logic                   o_full, o_empty, o_ovf;
  logic [$clog2(OFIFO_DEPTH):0] o_count;

  async_fifo #(.W(LANES*ADC_W), .DEPTH(AFIFO_DEPTH)) u_afifo (
    .wr_clk(rx_clk), .wr_rst_n(rx_rst_n), .wr_en(in_valid && capture), .wr_data(in_data),
    .full(a_full), .overflow(a_ovf),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(a_rd), .rd_data(a_data), .empty(a_empty)
  );

  piso #(.IN_L(LANES), .OUT_L(1), .W(ADC_W)) u_piso (
    .clk, .rst_n, .fifo_data(a_data), .fifo_empty(a_empty), .fifo_rd(a_rd),
    .go(o_count <= ($clog2(OFIFO_DEPTH)+1)'(OFIFO_DEPTH - LANES)), .out_valid(p_valid), .out_data(p_data), .out_word_last(p_last)
  );

  // decimator: keep the sample whose phase is 0, phase counts 0..decim-1
  assign keep = p_valid && (phase == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else if (p_valid) phase <= (phase + 1'b1 >= decim) ? '0 : phase + 1'b1;
  end

  sync_fifo #(.W(16), .DEPTH(OFIFO_DEPTH)) u_ofifo (
    .clk, .rst_n,
    .wr_en(keep), .wr_data(16'(signed'(p_data))),
    .rd_en(out_ready), .rd_data(out_data), .empty(o_empty), .full(o_full),
    .count(o_count), .overflow(o_ovf)
  );

  assign out_valid = !o_empty;
  assign overflow  = a_ovf || o_ovf;
endmodule
