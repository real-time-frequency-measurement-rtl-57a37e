// tb_xfer_piso: 60-byte words in, 4-byte words out, lowest bytes first,
// 15 beats per word, under random valid and ready.
module tb_xfer_piso;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [479:0] in_data;
  logic [31:0] out_data;
  int checks = 0, failures = 0;

  xfer_piso dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready);
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

  function automatic logic [31:0] w(int i); return 32'(i * 2654435761); endfunction

  int nin = 0, nout = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(out_data == w(nout), $sformatf("beat %0d", nout));
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
      if (nin >= 60) break;
      in_valid = ($urandom_range(3) != 0);
      for (int j = 0; j < 15; j++) in_data[32*j +: 32] = w(nin * 15 + j);
      out_ready = ($urandom_range(2) != 0);
    end
    in_valid = 0; out_ready = 1;
    repeat (40) @(negedge clk);
    check(nout == 900, $sformatf("beats %0d", nout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
