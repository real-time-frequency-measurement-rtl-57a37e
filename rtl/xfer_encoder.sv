// xfer_encoder: adapts the 40-byte words of the SIPO to the 60-byte words of
// the DDR interface (the "40" and "60" of the source's transfer diagram,
// which names the block "Encoder" without describing it).
//
// It is built here as a byte gearbox: input bytes are appended to a buffer
// of up to 100 bytes and every 60 bytes leave as one DDR word, earliest byte
// lowest, so three input words make two output words and nothing is added or
// dropped. Valid/ready on both sides; an input word is accepted while at most
// 60 bytes are buffered. Treating the encoder as a pure width adapter is this
// design's assumption.
module xfer_encoder #(
  parameter int unsigned IN_B  = 40,
  parameter int unsigned OUT_B = 60
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [IN_B*8-1:0]    in_data,
  output logic                 in_ready,
  output logic                 out_valid,
  output logic [OUT_B*8-1:0]   out_data,
  input  logic                 out_ready,
  output logic                 busy        // a whole output word is waiting
);
  localparam int unsigned BUF_B = IN_B + OUT_B;
  localparam int unsigned CW    = $clog2(BUF_B + 1);

  logic [BUF_B*8-1:0] buf_q;
  logic [CW-1:0]      cnt;
  logic               in_fire, out_fire;

  assign out_valid = cnt >= CW'(OUT_B);
  assign out_data  = buf_q[OUT_B*8-1:0];
  assign in_ready  = cnt <= CW'(OUT_B);
  assign in_fire   = in_valid && in_ready;
  assign out_fire  = out_valid && out_ready;
  assign busy      = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      cnt   <= '0;
    end else begin
      logic [BUF_B*8-1:0] b;
      logic [CW-1:0]      c;
      b = buf_q;
      c = cnt;
      if (out_fire) begin
        b = b >> (OUT_B * 8);
        c = c - CW'(OUT_B);
      end
      if (in_fire) begin
        b = b | ((BUF_B*8)'(in_data) << (c * 8));
        c = c + CW'(IN_B);
      end
      buf_q <= b;
      cnt   <= c;
    end
  end
endmodule
