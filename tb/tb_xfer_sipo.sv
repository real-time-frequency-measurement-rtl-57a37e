// tb_xfer_sipo: 8-byte words in, 40-byte words out: five inputs, first in the
// low bytes, make one output; random valid and ready on both sides; no word
// lost or duplicated.
module tb_xfer_sipo;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [63:0] in_data;
  logic [319:0] out_data;
  int checks = 0, failures = 0;

  xfer_sipo dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] w(int i); return {32'(i), 32'(i * 7 + 5)}; endfunction

  int nin = 0, nout = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      for (int j = 0; j < 5; j++) check(out_data[64*j +: 64] == w(nout * 5 + j), $sformatf("out %0d part %0d", nout, j));
      nout++;
    end
    if (in_valid && in_ready) nin++;
  end

  initial begin
    in_data = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    forever begin
      @(negedge clk);
      if (nin >= 500) break;
      in_valid = ($urandom_range(3) != 0);
      in_data  = w(nin);
      out_ready = ($urandom_range(2) != 0);
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    check(nout == 100, $sformatf("outputs %0d", nout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
