// tb_p2s_two_stage: 60 frames, one trigger every 22 beats (the source's
// ~11 MHz frame rate at 250 MHz), must appear on serial lane (frame mod 24)
// as 440 consecutive samples in order. Each lane's consumer behaves like the
// FFT padding: after a frame it is not ready for 72 clocks. No overflow.
module tb_p2s_two_stage;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, trigger = 0;
  logic [40*12-1:0] in_data;
  logic [23:0] out_valid, out_first, out_ready;
  logic [23:0][11:0] out_data;
  logic [31:0] frames;
  logic [15:0] missed;
  logic overflow;
  int checks = 0, failures = 0;
  localparam int NF = 60;

  p2s_two_stage dut (.clk, .rst_n, .in_valid, .in_data, .trigger, .out_valid, .out_first,
                     .out_data, .out_ready, .frames, .missed_triggers(missed), .overflow);

  always #5 clk = ~clk;

  function automatic logic [11:0] sample(int f, int i);
    return 12'((f * 577 + i * 11 + 5) % 4096);
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lframe[24], lpos[24], busy[24], frames_out = 0;
  initial for (int s = 0; s < 24; s++) begin lframe[s] = s; lpos[s] = 0; busy[s] = 0; end
  always_comb for (int s = 0; s < 24; s++) out_ready[s] = (busy[s] == 0);
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 24; s++) begin
      if (busy[s] > 0) busy[s]--;
      if (out_valid[s]) begin
        check(out_data[s] == sample(lframe[s], lpos[s]), $sformatf("lane %0d frame %0d sample %0d", s, lframe[s], lpos[s]));
        check(out_first[s] == (lpos[s] == 0), "first flag");
        lpos[s]++;
        if (lpos[s] == 440) begin lpos[s] = 0; lframe[s] += 24; frames_out++; busy[s] = 72; end
      end else if (lpos[s] != 0) check(0, $sformatf("lane %0d frame broken", s));
    end
  end

  initial begin
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      for (int b = 0; b < 22; b++) begin
        @(negedge clk);
        in_valid = 1;
        trigger  = (b == 0);
        for (int l = 0; l < 40; l++)
          in_data[l*12 +: 12] = (b < 11) ? sample(f, b * 40 + l) : 12'h800;
      end
    end
    @(negedge clk) in_valid = 0; trigger = 0;
    repeat (3000) @(posedge clk);
    check(frames == NF, "frames captured");
    check(frames_out == NF, $sformatf("frames out %0d", frames_out));
    check(!overflow, "no overflow at 22 beats per frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
