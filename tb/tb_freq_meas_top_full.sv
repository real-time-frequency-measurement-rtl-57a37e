// tb_freq_meas_top_full: the top at its default (full) parameters: 40-lane
// bus, 24 units of 512 points, blocks of 81920 results, frames of 20 blocks,
// 65536-entry FIFO, 2^25-word DDR (sparse model). It checks:
//  * 120 triggered frames at 22..30 clocks apart (the source's rate): each
//    frequency result within 0.3 bin of its tone; a trigger edge inside a
//    frame is counted as missed;
//  * a switch to the oscilloscope path with decimation 1 and one capture beat
//    every 42 clocks until one whole block (81920 samples) has been taken:
//    exactly one block must be moved into the DDR, and the first and last
//    DDR words of that block must hold the multiplexer output in order;
//  * no frame is read (a frame is 20 blocks, about 3.4 M clocks in this
//    mode, which is beyond this run), so the host side only has to report a
//    catch-up wait; no overflow anywhere.
module tb_freq_meas_top_full;
  import fm_pkg::*;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, adc_valid = 0, trigger = 0, capture = 0, mode_sel = 0, start_measure = 0, read_done = 0;
  logic [479:0] adc_data = '0, mem_wr_data, mem_rd_data;
  logic [15:0] decim = 1;
  logic mem_wr_en, mem_rd_en, mem_rdy, mem_rd_valid, pcie_valid, pcie_ready = 1, freq_valid;
  logic [24:0] mem_wr_addr, mem_rd_addr;
  logic [31:0] pcie_data, frames_captured, blocks_moved, frames_sent, catchup_waits;
  logic signed [15:0] freq;
  logic [15:0] missed_triggers;
  logic [4:0] overflow;
  int writes, reads, errors;
  int checks = 0, failures = 0;

  freq_meas_top dut (
    .clk, .rst_n, .adc_valid, .adc_data, .trigger, .rx_clk(clk), .rx_rst_n(rst_n), .capture, .decim,
    .mode_sel, .start_measure, .read_done, .mem_wr_en, .mem_wr_addr, .mem_wr_data, .mem_rd_en,
    .mem_rd_addr, .mem_rdy, .mem_rd_valid, .mem_rd_data, .pcie_valid, .pcie_data, .pcie_ready,
    .freq_valid, .freq, .frames_captured, .missed_triggers, .blocks_moved, .frames_sent,
    .catchup_waits, .overflow);
  tb_ddr_model #(.AW(25), .LAT(8), .RDY_PCT(80)) u_mem (
    .clk, .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .rd_en(mem_rd_en),
    .rd_addr(mem_rd_addr), .rdy(mem_rdy), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .writes, .reads, .errors);
  always #2 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_bin[$];
  logic [15:0] mq[$];         // all multiplexer output words, in order
  int  n_capt = 0, n_freq = 0, max_err = 0, n_missed = 0;
  bit  cap_req = 0;

  task automatic beat(input logic [479:0] d, input bit trg);
    @(negedge clk);
    adc_valid = 1; adc_data = d; trigger = trg; capture = cap_req;
  endtask

  function automatic logic [479:0] noise();
    logic [479:0] d;
    for (int l = 0; l < 40; l++) d[12*l +: 12] = 12'($urandom_range(0, 4000) - 2000);
    return d;
  endfunction

  task automatic frame(input real b, input int miss);
    real ph;
    ph = real'($urandom_range(0, 6283)) / 1000.0;
    exp_bin.push_back(b);
    n_capt++;
    if (miss) n_missed++;
    for (int bt = 0; bt < 11; bt++) begin
      logic [479:0] d;
      for (int l = 0; l < 40; l++) d[12*l +: 12] = 12'($rtoi($floor(1500.0 * $cos(2.0 * PI * b * real'(bt * 40 + l) / 512.0 + ph) + 0.5)));
      beat(d, bt == 0 || (miss != 0 && bt == miss));
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (freq_valid) begin
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
    if (dut.m_valid) mq.push_back(dut.m_data);
    if (pcie_valid) check(0, "no frame can be complete in this run");
  end

  // the DDR word w of the stream holds bytes 60w..60w+59, i.e. results 30w..30w+29
  task automatic check_ddr_word(input int w);
    logic [479:0] d;
    d = u_mem.mem.exists(longint'(w)) ? u_mem.mem[longint'(w)] : 'x;
    for (int j = 0; j < 30; j++) check(d[16*j +: 16] === mq[30 * w + j], $sformatf("DDR word %0d result %0d", w, j));
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (10) beat(noise(), 0);
    @(negedge clk) start_measure = 1;
    @(negedge clk) start_measure = 0;
    for (int f = 0; f < 120; f++) begin
      frame(3.0 + real'($urandom_range(0, 19700)) / 100.0, (f % 40 == 13) ? 4 : 0);
      repeat ($urandom_range(11, 19)) beat(noise(), 0);
    end
    repeat (2000) beat(noise(), 0);
    check(n_freq == n_capt && exp_bin.size() == 0 && frames_captured == 32'(n_capt), "every frame gave a result");
    check(missed_triggers == 16'(n_missed), "missed triggers counted");
    // oscilloscope mode until one block has been moved
    mode_sel = 1;
    while (mq.size() < 81920 + 40) begin
      cap_req = 1; beat(noise(), 0);
      cap_req = 0; repeat (41) beat(noise(), 0);
    end
    for (int i = 0; i < 40000 && blocks_moved == 0; i++) beat(noise(), 0);
    repeat (100) beat(noise(), 0);
    $display("INFO results=%0d max_err=%0d missed=%0d words_to_transfer=%0d blocks=%0d ddr_writes=%0d waits=%0d",
             n_freq, max_err, missed_triggers, mq.size(), blocks_moved, writes, catchup_waits);
    check(blocks_moved == 1, "one block moved");
    check(writes == (81920 * 2) / 60, "whole DDR words of one block written");
    check_ddr_word(0);
    check_ddr_word(writes - 1);
    check(frames_sent == 0 && catchup_waits > 0, "frame not yet complete, host waits");
    check(overflow == 5'b0 && errors == 0, "no overflow, no read/write collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
