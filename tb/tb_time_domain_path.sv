// tb_time_domain_path: 40-lane beats in a 10 ns receiver clock domain, the
// path on a 4 ns processing clock. Captured beats, serialised lane 0 first
// and decimated by 1, 3 and 7, must come out in order, sign-extended; beats
// with capture low are not taken. The output is read with random ready.
// Finally the reader stops and beats keep coming: overflow must be flagged.
module tb_time_domain_path;
  localparam int L = 40;
  logic rx_clk = 0, rx_rst_n = 0, in_valid = 0, capture = 0, clk = 0, rst_n = 0;
  logic [L*12-1:0] in_data = '0;
  logic [15:0] decim = 1, out_data;
  logic out_valid, out_ready = 0, overflow;
  int checks = 0, failures = 0;

  time_domain_path dut (.*);
  always #5 rx_clk = ~rx_clk;
  always #2 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] expq[$];
  int phase = 0, nbeat = 0, nout = 0;

  function automatic logic [11:0] smp(int b, int l); return 12'(b * 977 + l * 131 + 2048); endfunction

  task automatic send_beats(input int n, input bit cap);
    for (int b = 0; b < n; b++) begin
      @(negedge rx_clk);
      in_valid = 1; capture = cap;
      for (int l = 0; l < L; l++) in_data[12*l +: 12] = smp(nbeat, l);
      if (cap) for (int l = 0; l < L; l++) begin
        if (phase == 0) expq.push_back(16'(signed'(smp(nbeat, l))));
        phase = (phase + 1 >= int'(decim)) ? 0 : phase + 1;
      end
      nbeat++;
      @(negedge rx_clk) in_valid = 0;
      repeat ($urandom_range(15, 30)) @(negedge rx_clk);
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (expq.size() == 0) check(0, "unexpected output");
    else check(out_data == expq.pop_front(), $sformatf("sample %0d", nout));
    nout++;
  end
  always @(negedge clk) out_ready = ($urandom_range(2) != 0);

  initial begin
    repeat (3) @(posedge rx_clk);
    rx_rst_n = 1; rst_n = 1;
    send_beats(10, 1);
    send_beats(5, 0);
    decim = 3;
    send_beats(10, 1);
    decim = 7;
    send_beats(10, 1);
    repeat (200) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d samples missing", expq.size()));
    check(nout == 400 + 134 + 57, $sformatf("sample count %0d", nout));
    check(!overflow, "no overflow yet");
    force out_ready = 0;
    for (int b = 0; b < 60; b++) begin
      @(negedge rx_clk) in_valid = 1; capture = 1;
      @(negedge rx_clk) in_valid = 0;
    end
    repeat (100) @(posedge clk);
    check(overflow, "overflow when the reader stops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
