// tb_fft_r2sdf: four back-to-back 512-point frames (a cosine on bin 37, a
// cosine between bins, random samples, an impulse) against a floating-point
// DFT computed here; every bin, real and imaginary, must be within 4 LSB of
// X[k]/512. Also checks natural output order and the latency from the first
// input sample to bin 0 (N-1 + log2 N + N + 1 = 1033 clocks).
module tb_fft_r2sdf;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] in_re, out_re, out_im;
  logic [15:0] out_idx;
  int checks = 0, failures = 0;
  localparam int N = 512, NF = 4;
  localparam real PI = 3.14159265358979323846;

  fft_r2sdf #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_re, .out_valid, .out_idx, .out_re, .out_im);

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

  int x [NF][N];
  real xr [NF][N], xi [NF][N];
  initial begin
    for (int i = 0; i < N; i++) begin
      x[0][i] = $rtoi(12000.0 * $cos(2.0 * PI * 37.0 * i / N));
      x[1][i] = $rtoi(9000.0 * $cos(2.0 * PI * 100.3 * i / N + 0.4));
      x[2][i] = int'($urandom_range(32000)) - 16000;
      x[3][i] = (i == 3) ? 16000 : 0;
    end
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < N; k++) begin
        xr[f][k] = 0.0; xi[f][k] = 0.0;
        for (int n = 0; n < N; n++) begin
          xr[f][k] += x[f][n] * $cos(2.0 * PI * k * n / N);
          xi[f][k] -= x[f][n] * $sin(2.0 * PI * k * n / N);
        end
        xr[f][k] /= N; xi[f][k] /= N;
      end
  end

  int cyc = 0, t_first_in = -1, t_first_out = -1, of = 0, ok_idx = 0;
  real maxerr = 0.0;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && t_first_in < 0) t_first_in = cyc;
    if (out_valid) begin
      if (t_first_out < 0) t_first_out = cyc;
      check(out_idx == 16'(ok_idx), $sformatf("index %0d expected %0d", out_idx, ok_idx));
      begin
        real er, ei;
        er = real'(out_re) - xr[of][ok_idx]; if (er < 0.0) er = -er;
        ei = real'(out_im) - xi[of][ok_idx]; if (ei < 0.0) ei = -ei;
        if (er > maxerr) maxerr = er;
        if (ei > maxerr) maxerr = ei;
        check(er <= 4.0 && ei <= 4.0, $sformatf("frame %0d bin %0d: got %0d,%0d ref %f,%f", of, ok_idx, out_re, out_im, xr[of][ok_idx], xi[of][ok_idx]));
      end
      ok_idx++;
      if (ok_idx == N) begin ok_idx = 0; of++; end
    end
  end

  initial begin
    in_re = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_re    = 16'(x[f][i]);
      end
    @(negedge clk) in_valid = 0;
    repeat (1200) @(posedge clk);
    check(of == NF, $sformatf("frames out %0d", of));
    check(t_first_out - t_first_in == 1033, $sformatf("latency %0d", t_first_out - t_first_in));
    $display("INFO max error %f LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
