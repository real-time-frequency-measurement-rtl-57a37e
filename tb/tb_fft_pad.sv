// tb_fft_pad: two frames of 440 samples, sent back to back as the padder
// allows, must come out as 440 samples (times 8) followed by 72 zeros, with
// in_ready low for exactly the 72 padding clocks.
module tb_fft_pad;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic signed [11:0] in_data;
  logic signed [15:0] out_data;
  int checks = 0, failures = 0;

  fft_pad dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_data);

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

  function automatic logic signed [11:0] smp(int f, int i);
    return 12'((f * 1000 + i * 37) % 4096);
  endfunction

  int opos = 0, oframe = 0, notready = 0;
  always @(posedge clk) if (rst_n) begin
    if (!in_ready) notready++;
    if (out_valid) begin
      if (opos < 440) check(out_data == 16'(smp(oframe, opos)) * 16'sd8, $sformatf("frame %0d sample %0d", oframe, opos));
      else            check(out_data == 0, "pad is zero");
      opos++;
      if (opos == 512) begin opos = 0; oframe++; end
    end else if (opos != 0) check(0, "output frame contiguous");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < 440; i++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1;
        in_data  = smp(f, i);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (200) @(posedge clk);
    check(oframe == 2, "two frames out");
    check(notready == 144, $sformatf("in_ready low %0d clocks", notready));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
