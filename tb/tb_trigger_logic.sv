// tb_trigger_logic: checks frame windows and round-robin group selection of
// trigger_logic: 11-beat windows start on the trigger edge beat, groups go
// 0,1,2,0,..; a trigger during a window is ignored and counted; beats between
// windows are not captured.
module tb_trigger_logic;
  logic clk = 0, rst_n = 0, in_valid = 0, trigger = 0;
  logic cap_valid, cap_last;
  logic [1:0] cap_group;
  logic [31:0] frames;
  logic [15:0] missed;
  int checks = 0, failures = 0;

  trigger_logic #(.FRAME_BEATS(11), .N_GROUPS(3)) dut (
    .clk, .rst_n, .in_valid, .trigger, .cap_valid, .cap_last, .cap_group,
    .frames, .missed_triggers(missed));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ncap, nlast;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    in_valid <= 1;
    for (int f = 0; f < 7; f++) begin
      // gap of idle beats, then a trigger pulse
      repeat (5) begin
        @(negedge clk);
        check(!cap_valid, "no capture outside a window");
      end
      @(negedge clk) trigger = 1;
      ncap = 0; nlast = 0;
      for (int b = 0; b < 11; b++) begin
        #1;
        check(cap_valid, $sformatf("beat %0d of frame %0d captured", b, f));
        check(cap_group == 2'(f % 3), $sformatf("frame %0d group %0d", f, cap_group));
        check(cap_last == (b == 10), "last flag");
        // a second trigger edge in the middle of the window is ignored
        if (b == 3) trigger = 0;
        if (b == 5 && f == 2) trigger = 1;
        if (b == 6) trigger = 0;
        @(negedge clk);
      end
      trigger = 0;
      #1 check(!cap_valid, "window closes after 11 beats");
    end
    check(frames == 7, $sformatf("frame count %0d", frames));
    check(missed == 1, $sformatf("missed trigger count %0d", missed));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
