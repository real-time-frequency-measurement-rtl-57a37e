// path_mux: selects which path of a signal processing module feeds the
// real-time transfer: the frequency results (sel = 0, frequency detection
// mode) or the decimated samples of the time-domain path (sel = 1,
// oscilloscope mode). The frequency path has no back-pressure; the time path
// is read one word per clock while selected. The output is registered (one
// clock). The source names the multiplexer and the two modes; the encoding of
// sel is this design's choice.
module path_mux (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sel,
  input  logic        freq_valid,
  input  logic [15:0] freq_data,
  input  logic        time_valid,
  input  logic [15:0] time_data,
  output logic        time_ready,
  output logic        out_valid,
  output logic [15:0] out_data
);
  assign time_ready = sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (sel) begin
      out_valid <= time_valid;
      out_data  <= time_data;
    end else begin
      out_valid <= freq_valid;
      out_data  <= freq_data;
    end
  end
endmodule
