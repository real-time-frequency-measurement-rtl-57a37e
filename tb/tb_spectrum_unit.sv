// tb_spectrum_unit: frames of a noisy tone at a random, non-integer bin (and
// one with a Gaussian envelope, like the source's pulses) go through one
// spectrum unit back to back. The result is checked against a double-precision
// DFT of the zero-padded frame computed here: x0 must be the largest bin in
// 1..255, y-1, y0, y+1 must match |X[k]|*8/512 within 1% + 3 LSB, and the
// result must come 1550 clocks after the frame's first sample.
module tb_spectrum_unit;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic signed [11:0] in_data;
  peak_t out_peak;
  int checks = 0, failures = 0;
  localparam int NF = 6;
  localparam real PI = 3.14159265358979323846;
  `include "tb_fp32.svh"

  spectrum_unit dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_peak);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  x [NF][440];
  real mag [NF][257];
  int  bx [NF];
  int  t_start [NF];
  initial begin
    for (int f = 0; f < NF; f++) begin
      real fb, best;
      fb = 5.0 + real'($urandom_range(19500)) / 100.0;
      for (int n = 0; n < 440; n++) begin
        real env;
        env = (f == 2) ? $exp(-((n - 220.0) ** 2) / (2.0 * 80.0 * 80.0)) : 1.0;
        x[f][n] = $rtoi(1800.0 * env * $cos(2.0 * PI * fb * n / 512.0 + f)) + int'($urandom_range(40)) - 20;
      end
      best = -1.0;
      for (int k = 0; k <= 256; k++) begin
        real re, im;
        re = 0.0; im = 0.0;
        for (int n = 0; n < 440; n++) begin
          re += x[f][n] * 8.0 * $cos(2.0 * PI * k * n / 512.0);
          im -= x[f][n] * 8.0 * $sin(2.0 * PI * k * n / 512.0);
        end
        mag[f][k] = $sqrt(re * re + im * im) / 512.0;
        if (k >= 1 && k <= 255 && mag[f][k] > best) begin best = mag[f][k]; bx[f] = k; end
      end
    end
  end

  function automatic bit close(real got, real want);
    real e;
    e = got - want; if (e < 0.0) e = -e;
    return e <= 0.01 * want + 3.0;
  endfunction

  int cyc = 0, nout = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      int k;
      k = int'(out_peak.x0);
      check(k == bx[nout], $sformatf("frame %0d x0 %0d expected %0d", nout, k, bx[nout]));
      check(close(fp32real(out_peak.y0), mag[nout][bx[nout]]), $sformatf("y0 %f ref %f", fp32real(out_peak.y0), mag[nout][bx[nout]]));
      check(close(fp32real(out_peak.ym1), mag[nout][bx[nout]-1]), "y-1");
      check(close(fp32real(out_peak.y1), mag[nout][bx[nout]+1]), "y+1");
      check(cyc - t_start[nout] == 1550, $sformatf("latency %0d", cyc - t_start[nout]));
      nout++;
    end
  end

  initial begin
    in_data = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++) begin
      for (int n = 0; n < 440; n++) begin
        @(negedge clk);
        while (!in_ready) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_data  = 12'(x[f][n]);
        if (n == 0) t_start[f] = cyc + 1;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (1700) @(posedge clk);
    check(nout == NF, $sformatf("results %0d", nout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
