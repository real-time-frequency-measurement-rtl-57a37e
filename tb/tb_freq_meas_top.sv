// tb_freq_meas_top: end-to-end test of one signal processing module with its
// transfer path. The frequency path is at full size (40-lane bus, 440-point
// frames, 24 units of 512 points); the transfer caches are reduced (blocks of
// 120 results, frames of 2 blocks = 8 DDR words, 128-entry FIFO, 256-word DDR)
// so that many blocks and frames pass in a short run. The receiver clock is
// tied to clk, as in the top's description.
// Stimulus and checks:
//  * triggered frames, each a tone at its own bin (3..200), spaced 22..40
//    clocks: every frequency result, in order, must lie within 0.3 bin
//    (48 units) of the tone, and frames_captured must match;
//  * trigger edges inside a frame: must be counted in missed_triggers;
//  * a burst at 19 clocks per frame, faster than the 21.3 the units sustain:
//    frames must wait for their unit (stall, seen as a longer delay from
//    trigger to the unit's first sample) and still give correct results;
//  * mode switch to the oscilloscope path with short capture windows and
//    decimation 3 and then 2, and back: the samples must be the captured
//    samples, lane 0 first, one in `decim`;
//  * the PCIE stream must carry the multiplexer output, two results per word
//    in order; the host answers each frame with Read Done, sometimes after a
//    long stall, which forces catch-up reads and catch-up waits;
//  * finally the host stops, triggers come every 12 clocks and capture stays
//    high: P2S, time path and DDR overflow must be flagged.
// Each mechanism is counted and one that never happened is a failure.
module tb_freq_meas_top;
  import fm_pkg::*;
  localparam int BLOCK = 120, FB = 2, FRAME_W = 8, BEATS = FRAME_W * 15;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, adc_valid = 0, trigger = 0, capture = 0, mode_sel = 0, start_measure = 0, read_done = 0;
  logic [479:0] adc_data = '0, mem_wr_data, mem_rd_data;
  logic [15:0] decim = 1;
  logic mem_wr_en, mem_rd_en, mem_rdy, mem_rd_valid, pcie_valid, pcie_ready = 0, freq_valid;
  logic [7:0] mem_wr_addr, mem_rd_addr;
  logic [31:0] pcie_data, frames_captured, blocks_moved, frames_sent, catchup_waits;
  logic signed [15:0] freq;
  logic [15:0] missed_triggers;
  logic [4:0] overflow;
  int writes, reads, errors;
  int checks = 0, failures = 0;

  freq_meas_top #(.BLOCK_PTS(BLOCK), .FRAME_BLOCKS(FB), .XFIFO_DEPTH(128), .DDR_AW(8), .DDR_DEPTH(256)) dut (
    .clk, .rst_n, .adc_valid, .adc_data, .trigger, .rx_clk(clk), .rx_rst_n(rst_n), .capture, .decim,
    .mode_sel, .start_measure, .read_done, .mem_wr_en, .mem_wr_addr, .mem_wr_data, .mem_rd_en,
    .mem_rd_addr, .mem_rdy, .mem_rd_valid, .mem_rd_data, .pcie_valid, .pcie_data, .pcie_ready,
    .freq_valid, .freq, .frames_captured, .missed_triggers, .blocks_moved, .frames_sent,
    .catchup_waits, .overflow);
  tb_ddr_model #(.AW(8), .LAT(8), .RDY_PCT(80)) u_mem (
    .clk, .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .rd_en(mem_rd_en),
    .rd_addr(mem_rd_addr), .rdy(mem_rdy), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .writes, .reads, .errors);
  always #2 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  real  exp_bin[$];          // tone bin of every captured frame, in order
  int   trig_t[24][$];       // trigger time of captured frames, per lane
  logic [15:0] exp_osc[$];   // expected oscilloscope samples
  int   n_capt = 0, n_missed = 0, osc_phase = 0, n_switch = 0, cyc = 0;
  bit   check_freq = 1, cap_req = 0;

  always @(posedge clk) cyc++;

  task automatic beat(input logic [479:0] d, input bit trg);
    @(negedge clk);
    adc_valid = 1; adc_data = d; trigger = trg; capture = cap_req;
    if (capture) for (int l = 0; l < 40; l++) begin
      if (osc_phase == 0) exp_osc.push_back(16'(signed'(d[12*l +: 12])));
      osc_phase = (osc_phase + 1 >= int'(decim)) ? 0 : osc_phase + 1;
    end
  endtask

  function automatic logic [479:0] noise();
    logic [479:0] d;
    for (int l = 0; l < 40; l++) d[12*l +: 12] = 12'($urandom_range(0, 400) - 200);
    return d;
  endfunction

  task automatic idle(input int n);
    for (int i = 0; i < n; i++) beat(noise(), 0);
  endtask

  // one 11-beat frame, tone at bin b; a second trigger edge at beat `miss`
  // (0 = none) falls inside the frame and must be ignored
  task automatic frame(input real b, input int miss);
    real ph;
    ph = real'($urandom_range(0, 6283)) / 1000.0;
    exp_bin.push_back(b);
    trig_t[n_capt % 24].push_back(cyc);
    n_capt++;
    if (miss) n_missed++;
    for (int bt = 0; bt < 11; bt++) begin
      logic [479:0] d;
      for (int l = 0; l < 40; l++) d[12*l +: 12] = 12'($rtoi($floor(1500.0 * $cos(2.0 * PI * b * real'(bt * 40 + l) / 512.0 + ph) + 0.5)));
      beat(d, bt == 0 || (miss != 0 && bt == miss));
    end
  endtask

  function automatic real rbin(); return 3.0 + real'($urandom_range(0, 19700)) / 100.0; endfunction

  // ---------------- observers ----------------
  int n_freq = 0, max_err = 0, n_osc = 0, n_stalled = 0, min_delay = 1 << 30, max_delay = 0;
  always @(posedge clk) if (rst_n) begin
    if (freq_valid && check_freq) begin
      if (exp_bin.size() == 0) check(0, "frequency result without a frame");
      else begin
        int e, err;
        e = $rtoi(exp_bin.pop_front() * 160.0);
        err = int'(freq) - e; if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        check(err <= 48, $sformatf("result %0d: freq %0d expected %0d", n_freq, freq, e));
        n_freq++;
      end
    end
    for (int l = 0; l < 24; l++) if (dut.s_valid[l] && dut.s_first[l] && trig_t[l].size() > 0) begin
      int dl;
      dl = cyc - trig_t[l].pop_front();
      if (dl < min_delay) min_delay = dl;
      if (dl > max_delay) max_delay = dl;
      if (dl > 150) n_stalled++;
    end
    if (dut.t_valid && dut.t_ready) begin
      if (exp_osc.size() == 0) check(0, "unexpected oscilloscope sample");
      else if (!overflow[2]) check(dut.t_data == exp_osc.pop_front(), $sformatf("osc sample %0d", n_osc));
      n_osc++;
    end
  end

  // PCIE stream against the multiplexer output
  logic [15:0] mq[$];
  int n_pcie = 0, beat_in_frame = 0, host_frames = 0, host_stalls = 0;
  bit host_on = 1;
  always @(posedge clk) if (rst_n) begin
    if (dut.m_valid) mq.push_back(dut.m_data);
    if (pcie_valid && pcie_ready) begin
      logic [15:0] a, b;
      a = mq.size() > 0 ? mq.pop_front() : 'x;
      b = mq.size() > 0 ? mq.pop_front() : 'x;
      check(pcie_data === {b, a}, $sformatf("pcie word %0d t=%0d got %h exp %h%h ovf %b mq %0d", n_pcie, cyc, pcie_data, b, a, overflow, mq.size()));
      n_pcie++;
      beat_in_frame++;
      if (beat_in_frame == BEATS) begin
        beat_in_frame = 0;
        host_frames++;
        fork begin
          int d;
          d = (host_frames % 6 == 2) ? 15000 : $urandom_range(1, 300);
          if (d > 10000) host_stalls++;
          repeat (d) @(posedge clk);
          wait (host_on);
          read_done <= 1; @(posedge clk); read_done <= 0;
        end join_none
      end
    end
  end
  always @(negedge clk) pcie_ready = ($urandom_range(3) != 0);

  task automatic osc_session(input int d, input int windows);
    wait (exp_bin.size() == 0);
    repeat (20) @(negedge clk);
    mode_sel = 1; decim = 16'(d); n_switch++;
    for (int w = 0; w < windows; w++) begin
      cap_req = 1;
      idle(4);
      cap_req = 0;
      idle(200);
    end
    wait (exp_osc.size() == 0);
    repeat (20) @(negedge clk);
    mode_sel = 0; n_switch++;
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    idle(10);
    @(negedge clk) start_measure = 1;
    @(negedge clk) start_measure = 0;
    // frequency mode, normal rate, some triggers inside frames
    for (int f = 0; f < 150; f++) begin
      frame(rbin(), (f % 15 == 7) ? 5 : 0);
      idle($urandom_range(11, 29));
    end
    // burst faster than the units sustain
    for (int f = 0; f < 48; f++) begin frame(rbin(), 0); idle(8); end
    idle(3000);
    osc_session(3, 40);
    for (int f = 0; f < 100; f++) begin frame(rbin(), 0); idle($urandom_range(11, 29)); end
    idle(3000);
    osc_session(2, 60);
    for (int f = 0; f < 60; f++) begin frame(rbin(), 0); idle($urandom_range(11, 29)); end
    idle(3000);
    // let the host catch up with everything stored
    repeat (60000) @(negedge clk);
    $display("INFO frames=%0d missed=%0d results=%0d max_err=%0d delay=%0d..%0d stalled=%0d osc=%0d switches=%0d",
             frames_captured, missed_triggers, n_freq, max_err, min_delay, max_delay, n_stalled, n_osc, n_switch);
    $display("INFO blocks=%0d frames_sent=%0d catchup_waits=%0d host_stalls=%0d pcie_words=%0d",
             blocks_moved, frames_sent, catchup_waits, host_stalls, n_pcie);
    check(frames_captured == 32'(n_capt) && n_capt == 358, "frames captured");
    check(missed_triggers == 16'(n_missed) && n_missed > 0, "missed triggers counted");
    check(n_freq == n_capt && exp_bin.size() == 0, "every frame gave a result");
    check(n_stalled > 0, "frames stalled waiting for their unit");
    check(n_switch == 4, "mode switched to oscilloscope and back twice");
    check(n_osc > 0 && exp_osc.size() == 0, "oscilloscope samples checked");
    check(blocks_moved > 20, "blocks moved");
    check(frames_sent > 10 && frames_sent == 32'(host_frames), "frames sent to the host");
    check(host_stalls > 0 && catchup_waits > 0, "host stalls and catch-up waits");
    check(n_pcie == host_frames * BEATS, "PCIE words");
    check(overflow == 5'b0, "no overflow in normal operation");
    check(errors == 0, "memory never read and written together");
    // overload: host stops, triggers too fast, capture stays high
    $display("INFO overload starts at %0d", cyc);
    host_on = 0; check_freq = 0;
    for (int f = 0; f < 60; f++) begin frame(rbin(), 0); idle(1); end
    mode_sel = 1; cap_req = 1;
    idle(20000);
    cap_req = 0;
    idle(100);
    check(overflow[0], "P2S overflow when triggers come too fast");
    check(overflow[2], "time path overflow when capture stays on");
    check(overflow[4], "DDR overflow when the host stops");
    $display("INFO overflow=%b", overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
