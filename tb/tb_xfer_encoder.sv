// tb_xfer_encoder: a byte stream cut into 40-byte words must come out as the
// same byte stream in 60-byte words (three in, two out), under random valid
// and ready; leftover bytes wait for the next input.
module tb_xfer_encoder;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, busy;
  logic [319:0] in_data;
  logic [479:0] out_data;
  int checks = 0, failures = 0;

  xfer_encoder dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready, .busy);
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

  function automatic logic [7:0] bt(int i); return 8'((i * 13 + i / 256) % 256); endfunction

  int nin = 0, nout = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      for (int j = 0; j < 60; j++) check(out_data[8*j +: 8] == bt(nout * 60 + j), $sformatf("byte %0d", nout * 60 + j));
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
      if (nin >= 301) break;
      in_valid = ($urandom_range(3) != 0);
      for (int j = 0; j < 40; j++) in_data[8*j +: 8] = bt(nin * 40 + j);
      out_ready = ($urandom_range(2) != 0);
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    check(nout == 200, $sformatf("outputs %0d", nout));
    check(out_valid == 0 && busy == 0, "20 bytes left over wait, no whole word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
