// tb_ddr_model: behavioural stand-in for the DDR memory behind its controller
// IP, used by the transfer and top-level testbenches.
// A sparse word memory (associative array). mem_rdy is high on a random
// RDY_PCT percent of clocks (refresh and bank stalls); a command is taken when
// en && rdy. Read data comes back LAT clocks later on rd_valid, in order.
// Write and read commands on the same clock count as an error (errors).
module tb_ddr_model #(
  parameter int AW      = 10,
  parameter int W       = 480,
  parameter int LAT     = 6,
  parameter int RDY_PCT = 80
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rdy,
  output logic          rd_valid,
  output logic [W-1:0]  rd_data,
  output int            writes,
  output int            reads,
  output int            errors
);
  logic [W-1:0] mem [longint];
  logic [W-1:0] pipe_d [LAT];
  logic         pipe_v [LAT];

  initial begin
    rdy = 1; writes = 0; reads = 0; errors = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
  end

  assign rd_valid = pipe_v[LAT-1];
  assign rd_data  = pipe_d[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= 0;
    if (wr_en && rd_en) errors++;
    if (wr_en && rdy) begin mem[longint'(wr_addr)] = wr_data; writes++; end
    if (rd_en && rdy) begin
      pipe_v[0] <= 1;
      pipe_d[0] <= mem.exists(longint'(rd_addr)) ? mem[longint'(rd_addr)] : 'x;
      reads++;
    end
    rdy <= ($urandom_range(99) < RDY_PCT);
  end
endmodule
