// tb_parabola_fit: random three-point peaks built from parabolas and Gaussians
// with a known vertex, plus a flat top, each checked against the vertex
// x0 + (y+1 - y-1) / (2 (2 y0 - y+1 - y-1)) computed in double precision:
// the fitted bin within 2^-10, the S16,4 frequency (bin * 10, unit 2 MHz, from the truncated bin)
// within one LSB (saturating above 4096 MHz), one result per clock, latency 5.
module tb_parabola_fit;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  peak_t in_peak;
  logic signed [15:0] out_freq;
  logic signed [28:0] out_xc;
  int checks = 0, failures = 0;
  `include "tb_fp32.svh"

  parabola_fit dut (.clk, .rst_n, .in_valid, .in_peak, .out_valid, .out_freq, .out_xc);

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

  real xq [$];
  int  tq [$];
  int  cyc = 0, nout = 0, nsat = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      real xr, e, fr;
      xr = xq.pop_front();
      check(cyc - tq.pop_front() == 5, "latency 5");
      e = real'(out_xc) / 4096.0 - xr; if (e < 0.0) e = -e;
      check(e <= 2.0**-10, $sformatf("xc %f ref %f", real'(out_xc) / 4096.0, xr));
      fr = xr * 160.0;
      if (fr > 32767.0) fr = 32767.0;   // S16,4 saturates above 4096 MHz
      e = real'(out_freq) - fr; if (e < 0.0) e = -e;
      check(e <= 1.1, $sformatf("freq %0d ref %f", out_freq, fr));
      if (fr == 32767.0) nsat++;
      nout++;
    end
  end

  initial begin
    in_peak = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      real a, d, s, ym1, y0, y1, r0, rm, rp, xr;
      int  x0;
      @(negedge clk);
      x0 = $urandom_range(1, 254);
      d  = (real'($urandom_range(10000)) / 10000.0) - 0.5;  // true offset
      a  = 10.0 + real'($urandom_range(1000000));
      if (i % 3 == 0) begin         // parabola
        ym1 = a - a * 0.2 * (-1.0 - d) ** 2;
        y0  = a - a * 0.2 * d ** 2;
        y1  = a - a * 0.2 * (1.0 - d) ** 2;
      end else if (i % 3 == 1) begin // Gaussian
        s   = 0.6 + real'($urandom_range(100)) / 50.0;
        ym1 = a * $exp(-((-1.0 - d) ** 2) / (2 * s * s));
        y0  = a * $exp(-(d ** 2) / (2 * s * s));
        y1  = a * $exp(-((1.0 - d) ** 2) / (2 * s * s));
      end else begin
        ym1 = a * real'($urandom_range(1000)) / 1000.0;
        y1  = a * real'($urandom_range(1000)) / 1000.0;
        y0  = a;
      end
      if (i == 7) begin ym1 = 500.0; y0 = 500.0; y1 = 500.0; end // flat top
      in_peak.ym1 = real2fp32(ym1);
      in_peak.y0  = real2fp32(y0);
      in_peak.y1  = real2fp32(y1);
      in_peak.x0  = 16'(x0);
      rm = fp32real(in_peak.ym1); r0 = fp32real(in_peak.y0); rp = fp32real(in_peak.y1);
      if (2.0 * r0 - rp - rm <= 0.0) xr = x0;
      else begin
        xr = (rp - rm) / (2.0 * (2.0 * r0 - rp - rm));
        if (xr > 1.0) xr = 1.0;
        if (xr < -1.0) xr = -1.0;
        xr = x0 + xr;
      end
      xq.push_back(xr);
      tq.push_back(cyc + 1);
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    check(nout == 3000, "one result per input");
    check(nsat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
