// tb_pipeline_fft: the 24 spectrum units run in parallel on 48 frames, frame
// k on unit k mod 24, started 21 or 22 clocks apart (the source's 11.7 MHz
// frame rate). Each frame is a tone at its own random bin; every unit's x0
// must be the largest bin of a double-precision DFT of its frame, and every
// unit must deliver its results, in the order of its frames.
module tb_pipeline_fft;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [23:0] in_valid, in_ready, out_valid;
  logic [23:0][11:0] in_data;
  peak_t [23:0] out_peak;
  int checks = 0, failures = 0;
  localparam int NF = 48;
  localparam real PI = 3.14159265358979323846;

  pipeline_fft dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_peak);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real fb [NF];
  int  bx [NF];
  initial begin
    for (int f = 0; f < NF; f++) begin
      real best;
      fb[f] = 3.0 + real'($urandom_range(24500)) / 100.0;
      best = -1.0;
      for (int k = 1; k <= 255; k++) begin
        real re, im, m;
        re = 0.0; im = 0.0;
        for (int n = 0; n < 440; n++) begin
          real s;
          s = real'($rtoi(1500.0 * $cos(2.0 * PI * fb[f] * n / 512.0)));
          re += s * $cos(2.0 * PI * k * n / 512.0);
          im -= s * $sin(2.0 * PI * k * n / 512.0);
        end
        m = re * re + im * im;
        if (m > best) begin best = m; bx[f] = k; end
      end
    end
  end

  int got [24];
  initial got = '{default: 0};
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 24; l++) if (out_valid[l]) begin
      int f;
      f = got[l] * 24 + l;
      check(int'(out_peak[l].x0) == bx[f], $sformatf("lane %0d frame %0d x0 %0d expected %0d", l, f, out_peak[l].x0, bx[f]));
      got[l]++;
    end
  end

  // one driver per lane
  for (genvar l = 0; l < 24; l++) begin : g_drv
    initial begin
      in_valid[l] = 0; in_data[l] = 0;
      wait (rst_n);
      for (int r = 0; r < NF / 24; r++) begin
        int f;
        f = r * 24 + l;
        // frame f starts at clock f * 21.3 after reset
        repeat ((f * 64) / 3 - ((r == 0) ? 0 : ((f - 24) * 64) / 3 + 440)) @(negedge clk);
        for (int n = 0; n < 440; n++) begin
          @(negedge clk);
          check(in_ready[l], "unit ready when its next frame is due");
          in_valid[l] = 1;
          in_data[l]  = 12'($rtoi(1500.0 * $cos(2.0 * PI * fb[f] * n / 512.0)));
        end
        @(negedge clk) in_valid[l] = 0;
      end
    end
  end

  initial begin
    wait (rst_n);
    wait (got.sum() == NF);
    repeat (5) @(posedge clk);
    for (int l = 0; l < 24; l++) check(got[l] == NF / 24, $sformatf("lane %0d results %0d", l, got[l]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end
endmodule
