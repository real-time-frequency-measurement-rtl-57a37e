// tb_path_mux: random traffic on both inputs while sel switches between the
// frequency path (0) and the time path (1); the registered output must equal
// the selected input of the previous clock and time_ready must follow sel.
module tb_path_mux;
  logic clk = 0, rst_n = 0, sel = 0, freq_valid = 0, time_valid = 0, time_ready, out_valid;
  logic [15:0] freq_data = 0, time_data = 0, out_data;
  int checks = 0, failures = 0;

  path_mux dut (.*);
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

  int switches = 0;
  initial begin
    logic ev; logic [15:0] ed;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if ($urandom_range(49) == 0) begin sel = ~sel; switches++; end
      freq_valid = $urandom_range(1); freq_data = 16'($urandom);
      time_valid = $urandom_range(1); time_data = 16'($urandom);
      check(time_ready == sel, "time_ready follows sel");
      ev = sel ? time_valid : freq_valid;
      ed = sel ? time_data : freq_data;
      @(negedge clk);
      check(out_valid == ev && (!ev || out_data == ed), $sformatf("cycle %0d", i));
    end
    check(switches > 10, "mode switched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
