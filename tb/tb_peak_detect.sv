// tb_peak_detect: frames of 512 magnitudes with a random background, one or
// more peaks (including ties, and peaks at the search-range edges); the
// result must give the first largest bin in 1..255 and the float magnitudes
// of it and its two neighbours, one clock after the last bin.
module tb_peak_detect;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] in_idx;
  logic [31:0] in_mag_f;
  logic [23:0] in_mag_fix;
  peak_t out_peak;
  int checks = 0, failures = 0;
  `include "tb_fp32.svh"

  peak_detect dut (.clk, .rst_n, .in_valid, .in_idx, .in_mag_f, .in_mag_fix, .out_valid, .out_peak);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m [512];
  int exp_x0 [$];
  int exp_ym1 [$], exp_y0 [$], exp_y1 [$];
  int nout = 0, last_in_cyc = 0, cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      int x, ym1, y0, y1;
      x = exp_x0.pop_front();
      ym1 = exp_ym1.pop_front(); y0 = exp_y0.pop_front(); y1 = exp_y1.pop_front();
      check(out_peak.x0 == 16'(x), $sformatf("x0 %0d expected %0d", out_peak.x0, x));
      check(fp32real(out_peak.ym1) == real'(ym1), "y-1");
      check(fp32real(out_peak.y0)  == real'(y0), $sformatf("y0 %f exp %0d; ym1 %f exp %0d", fp32real(out_peak.y0), y0, fp32real(out_peak.ym1), ym1));
      check(fp32real(out_peak.y1)  == real'(y1), "y+1");
      check(cyc == last_in_cyc + 1, "result one clock after the last bin");
      nout++;
    end
  end

  initial begin
    in_idx = 0; in_mag_f = 0; in_mag_fix = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 40; f++) begin
      int best, bx;
      for (int k = 0; k < 512; k++) m[k] = int'($urandom_range(1000));
      case (f % 5)
        0: m[1]   = 5000;                        // peak at the low edge
        1: m[255] = 5000;                        // peak at the high edge
        2: begin m[70] = 4000; m[90] = 4000; end // tie: first wins
        3: m[300] = 9000;                        // outside the search range
        default: m[$urandom_range(2, 254)] = 3000 + int'($urandom_range(1000));
      endcase
      best = -1; bx = 0;
      for (int k = 1; k <= 255; k++) if (m[k] > best) begin best = m[k]; bx = k; end
      exp_x0.push_back(bx);
      exp_ym1.push_back(m[bx-1]); exp_y0.push_back(m[bx]); exp_y1.push_back(m[bx+1]);
      for (int k = 0; k < 512; k++) begin
        @(negedge clk);
        in_valid   = 1;
        in_idx     = 16'(k);
        in_mag_f   = real2fp32(real'(m[k]));
        in_mag_fix = 24'(m[k]) << 8;
        if (k == 511) last_in_cyc = cyc + 1;
      end
      if (f % 3 == 0) begin @(negedge clk) in_valid = 0; repeat (5) @(negedge clk); end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    check(nout == 40, "one result per frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
