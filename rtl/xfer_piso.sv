// xfer_piso: parallel-in serial-out converter at the DDR read side of the
// transfer path: one 60-byte DDR word in, OUT_B-byte words out toward the PCIE
// interface, lowest bytes first, with valid/ready on both sides. The source's
// diagram gives the 60-byte input; the 4-byte output (15 beats per word, 1 GB/s
// at 250 MHz against the 500 MB/s of the PCIE 2.0 link) is this design's
// choice. A new word is accepted only when the previous one has been sent.
module xfer_piso #(
  parameter int unsigned IN_B  = 60,
  parameter int unsigned OUT_B = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [IN_B*8-1:0]   in_data,
  output logic                in_ready,
  output logic                out_valid,
  output logic [OUT_B*8-1:0]  out_data,
  input  logic                out_ready
);
  localparam int unsigned R  = IN_B / OUT_B;
  localparam int unsigned CW = $clog2(R + 1);

  logic [IN_B*8-1:0] sh;
  logic [CW-1:0]     left;

  assign in_ready  = (left == '0);
  assign out_valid = (left != '0);
  assign out_data  = sh[OUT_B*8-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh   <= '0;
      left <= '0;
    end else if (in_valid && in_ready) begin
      sh   <= in_data;
      left <= CW'(R);
    end else if (out_valid && out_ready) begin
      sh   <= sh >> (OUT_B * 8);
      left <= left - 1'b1;
    end
  end

  initial assert (IN_B % OUT_B == 0) else $error("IN_B must be a multiple of OUT_B");
endmodule
