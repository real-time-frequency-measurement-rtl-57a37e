// tb_p2s_stage1: frames of 11 beats x 40 lanes, triggered every 23 beats,
// must come out of group (frame mod 3) as 55 slices of 8 samples, in sample
// order, with no overflow. Sample values encode frame and position.
module tb_p2s_stage1;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, trigger = 0;
  logic [40*12-1:0] in_data;
  logic [2:0] out_valid;
  logic [2:0][8*12-1:0] out_data;
  logic [31:0] frames;
  logic [15:0] missed;
  logic [2:0] overflow;
  int checks = 0, failures = 0;
  localparam int NF = 12;

  p2s_stage1 dut (.clk, .rst_n, .in_valid, .in_data, .trigger, .out_valid, .out_data,
                  .frames, .missed_triggers(missed), .overflow);

  always #5 clk = ~clk;

  function automatic logic [11:0] sample(int f, int i);
    return 12'((f * 441 + i * 7 + 3) % 4096);
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected position per group
  int gframe[3], gpos[3];
  initial begin gframe[0] = 0; gframe[1] = 1; gframe[2] = 2; gpos = '{0, 0, 0}; end
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 3; g++) if (out_valid[g]) begin
      for (int l = 0; l < 8; l++)
        check(out_data[g][l*12 +: 12] == sample(gframe[g], gpos[g] + l),
              $sformatf("group %0d frame %0d sample %0d", g, gframe[g], gpos[g] + l));
      gpos[g] += 8;
      if (gpos[g] == 440) begin gpos[g] = 0; gframe[g] += 3; end
    end
  end

  initial begin
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      for (int b = 0; b < 23; b++) begin
        @(negedge clk);
        in_valid = 1;
        trigger  = (b == 0);
        for (int l = 0; l < 40; l++)
          in_data[l*12 +: 12] = (b < 11) ? sample(f, b * 40 + l) : 12'hABC;
      end
    end
    @(negedge clk) in_valid = 0; trigger = 0;
    repeat (300) @(posedge clk);
    check(frames == NF, "frame count");
    check(overflow == 0, "no overflow");
    for (int g = 0; g < 3; g++)
      check(gframe[g] == g + 3 * (NF / 3) && gpos[g] == 0, $sformatf("group %0d received all frames", g));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
