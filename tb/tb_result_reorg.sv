// tb_result_reorg: in every round each of the 24 lanes delivers one result
// at a random time (lane results of a round arrive in any order); the
// outputs must come in lane order 0..23, round after round, with the values
// sent. A final round delivers a lane twice before it is taken and must raise
// overflow.
module tb_result_reorg;
  import fm_pkg::*;
  logic clk = 0, rst_n = 0, out_valid, overflow;
  logic [23:0] in_valid;
  peak_t [23:0] in_peak;
  peak_t out_peak;
  int checks = 0, failures = 0;
  localparam int ROUNDS = 30;

  result_reorg dut (.clk, .rst_n, .in_valid, .in_peak, .out_valid, .out_peak, .overflow);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic peak_t mk(int r, int l);
    peak_t p;
    p.ym1 = 32'(r * 1000 + l);
    p.y0  = 32'(r * 7 + l * 3);
    p.y1  = 32'($urandom);
    p.x0  = 16'(r * 24 + l);
    return p;
  endfunction

  int nexp = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    check(out_peak.x0 == 16'(nexp), $sformatf("result order: got %0d expected %0d", out_peak.x0, nexp));
    check(out_peak.ym1 == 32'((nexp / 24) * 1000 + nexp % 24), "payload");
    nexp++;
  end

  initial begin
    in_valid = '0; in_peak = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < ROUNDS; r++) begin
      int order [24];
      for (int l = 0; l < 24; l++) order[l] = l;
      order.shuffle();
      // deliver every lane once, in shuffled order, sometimes several per clock
      for (int i = 0; i < 24; ) begin
        @(negedge clk);
        in_valid = '0;
        repeat ($urandom_range(1, 3)) if (i < 24) begin
          in_valid[order[i]] = 1'b1;
          in_peak[order[i]]  = mk(r, order[i]);
          i++;
        end
      end
      @(negedge clk) in_valid = '0;
      repeat (30) @(negedge clk);
    end
    check(nexp == ROUNDS * 24, $sformatf("results out %0d", nexp));
    check(!overflow, "no overflow in normal use");
    // lane 5 twice while lane 0 has not yet delivered
    @(negedge clk) in_valid = '0; in_valid[5] = 1; in_peak[5] = mk(0, 5);
    @(negedge clk) in_valid[5] = 1;
    @(negedge clk) in_valid = '0;
    repeat (2) @(posedge clk);
    check(overflow, "overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
