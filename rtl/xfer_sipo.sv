// xfer_sipo: serial-in parallel-out width converter of the transfer path,
// 8-byte words in, 40-byte words out (the "8" and "40" of the source's
// transfer diagram). Five input words, the first in the low bytes, make one
// output word. Valid/ready on both sides; a full output word is held until
// taken, and no input is accepted meanwhile (throughput 5 of 6 clocks, well
// above the need). The packing order and handshake are this design's choices.
module xfer_sipo #(
  parameter int unsigned IN_B  = 8,
  parameter int unsigned OUT_B = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [IN_B*8-1:0]    in_data,
  output logic                 in_ready,
  output logic                 out_valid,
  output logic [OUT_B*8-1:0]   out_data,
  input  logic                 out_ready
);
  localparam int unsigned R  = OUT_B / IN_B;
  localparam int unsigned CW = $clog2(R + 1);
  logic [CW-1:0] cnt;

  assign out_valid = (cnt == CW'(R));
  assign in_ready  = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      out_data <= '0;
    end else begin
      if (out_valid && out_ready) cnt <= '0;
      else if (in_valid && in_ready) begin
        out_data <= {in_data, out_data[OUT_B*8-1:IN_B*8]};
        cnt      <= cnt + 1'b1;
      end
    end
  end

  initial assert (OUT_B % IN_B == 0) else $error("OUT_B must be a multiple of IN_B");
endmodule
