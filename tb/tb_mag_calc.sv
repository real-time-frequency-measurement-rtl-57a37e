// tb_mag_calc: random and corner-case complex bins; the fp32 magnitude must be
// within 2^-22 relative of sqrt(re^2+im^2) computed in double precision, the
// fixed-point copy within one LSB (1/256) of it, the index must travel along,
// and the latency must be 4 clocks.
module tb_mag_calc;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] in_idx, out_idx;
  logic signed [15:0] in_re, in_im;
  logic [31:0] out_mag_f;
  logic [23:0] out_mag_fix;
  int checks = 0, failures = 0;
  `include "tb_fp32.svh"

  mag_calc dut (.clk, .rst_n, .in_valid, .in_idx, .in_re, .in_im, .out_valid, .out_idx,
                .out_mag_f, .out_mag_fix);

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

  real   ref_q [$];
  int    idx_q [$];
  int    t_in  [$];
  int    cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      real r, g, e;
      r = ref_q.pop_front();
      check(out_idx == 16'(idx_q.pop_front()), "index travels with the bin");
      check(cyc - t_in.pop_front() == 4, "latency 4");
      g = fp32real(out_mag_f);
      e = g - r; if (e < 0.0) e = -e;
      check(e <= r * 2.0**-22 + 1e-30, $sformatf("float mag %f ref %f", g, r));
      e = real'(out_mag_fix) / 256.0 - r; if (e < 0.0) e = -e;
      check(e <= r * 2.0**-22 + 1.0 / 256.0 + 1e-9, $sformatf("fixed mag %0d ref %f", out_mag_fix, r));
    end
    if (in_valid) begin
      ref_q.push_back($sqrt(real'(in_re) * in_re + real'(in_im) * in_im));
      idx_q.push_back(int'(in_idx));
      t_in.push_back(cyc);
    end
  end

  initial begin
    in_re = 0; in_im = 0; in_idx = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = (i % 7) != 3;
      in_idx   = 16'(i);
      case (i)
        0: begin in_re = 0; in_im = 0; end
        1: begin in_re = -32768; in_im = -32768; end
        2: begin in_re = 1; in_im = 0; end
        4: begin in_re = 3; in_im = 4; end
        default: begin
          in_re = 16'($urandom >> ($urandom_range(16)));
          in_im = 16'($urandom >> ($urandom_range(16)));
        end
      endcase
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    check(ref_q.size() == 0, "all results out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
