// tb_p2s_stage2: 8-lane slices of 20 frames enter one group; subgroup
// (frame mod 8) must emit each frame as 440 consecutive samples in order,
// first flag on the first, only after the whole frame is buffered and while
// out_ready is high.
module tb_p2s_stage2;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [8*12-1:0] in_data;
  logic [7:0] out_valid, out_first, out_ready, overflow;
  logic [7:0][11:0] out_data;
  int checks = 0, failures = 0;
  localparam int NF = 20;

  p2s_stage2 dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_first, .out_data,
                  .out_ready, .overflow);

  always #5 clk = ~clk;

  function automatic logic [11:0] sample(int f, int i);
    return 12'((f * 331 + i * 13 + 1) % 4096);
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

  int sframe[8], spos[8], frames_out = 0, slices_in = 0;
  logic [7:0] was_valid;
  initial for (int s = 0; s < 8; s++) begin sframe[s] = s; spos[s] = 0; end
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 8; s++) begin
      if (out_valid[s]) begin
        check(out_data[s] == sample(sframe[s], spos[s]), $sformatf("sub %0d frame %0d sample %0d", s, sframe[s], spos[s]));
        check(out_first[s] == (spos[s] == 0), "first flag");
        if (spos[s] == 0) begin
          check(out_ready[s], "frame starts only while ready");
          // the whole frame was buffered: all its slices were written
          check(slices_in >= (sframe[s] + 1) * 55, "frame fully buffered before start");
        end
        spos[s]++;
        if (spos[s] == 440) begin spos[s] = 0; sframe[s] += 8; frames_out++; end
      end else if (spos[s] != 0) begin
        check(0, $sformatf("sub %0d frame broken at %0d", s, spos[s]));
      end
    end
    if (in_valid) slices_in++;
  end

  initial begin
    in_data = '0;
    out_ready = '1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < 55; k++) begin
        @(negedge clk);
        in_valid = 1;
        for (int l = 0; l < 8; l++) in_data[l*12 +: 12] = sample(f, k * 8 + l);
        out_ready = 8'($urandom);
      end
      @(negedge clk) in_valid = 0;
      repeat (10) @(negedge clk);
    end
    @(negedge clk) in_valid = 0; out_ready = '1;
    repeat (2000) @(posedge clk);
    check(frames_out == NF, $sformatf("frames out %0d", frames_out));
    check(overflow == 0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
