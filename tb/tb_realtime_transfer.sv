// tb_realtime_transfer: the whole transfer path at reduced size (blocks of
// 240 results, frames of 3 blocks = 24 DDR words, FIFO of 256 entries, DDR of
// 100 words) with the random-stall memory model and a host that takes the
// 4-byte stream with random ready and answers each frame with Read Done after
// a random delay. Every output word must be the next two input results in
// order. The test counts blocks moved, frames read, host stalls that forced
// catch-up reads, catch-up waits, and finally stops the host so that the DDR
// fills and overflow is flagged; each of these must have happened.
module tb_realtime_transfer;
  localparam int BLOCK = 240, FB = 3, FRAME_W = 24, BEATS = FRAME_W * 15;
  logic clk = 0, rst_n = 0, in_valid = 0, start_measure = 0, read_done = 0;
  logic [15:0] in_data = 0;
  logic mem_wr_en, mem_rd_en, mem_rdy, mem_rd_valid, out_valid, out_ready = 0, fifo_overflow, ddr_overflow;
  logic [6:0] mem_wr_addr, mem_rd_addr;
  logic [479:0] mem_wr_data, mem_rd_data;
  logic [31:0] out_data, blocks, frames, catchup_waits;
  int writes, reads, errors;
  int checks = 0, failures = 0;

  realtime_transfer #(.BLOCK_PTS(BLOCK), .FRAME_BLOCKS(FB), .FIFO_DEPTH(256), .DDR_AW(7), .DDR_DEPTH(100)) dut (.*);
  tb_ddr_model #(.AW(7), .LAT(7), .RDY_PCT(75)) u_mem (
    .clk, .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .rd_en(mem_rd_en),
    .rd_addr(mem_rd_addr), .rdy(mem_rdy), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .writes, .reads, .errors);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] v(int i); return 16'(i * 40503 + 7); endfunction

  // source: one result every other clock on average
  int nin = 0;
  bit src_on = 1;
  always @(negedge clk) begin
    in_valid = rst_n && src_on && ($urandom_range(1) == 1);
    in_data  = v(nin);
    if (in_valid) nin++;
  end

  // host
  int nout = 0, beat_in_frame = 0, long_stalls = 0, frames_seen = 0;
  bit host_on = 1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(out_data == {v(2 * nout + 1), v(2 * nout)}, $sformatf("word %0d", nout));
    nout++;
    beat_in_frame++;
    if (beat_in_frame == BEATS) begin
      beat_in_frame = 0;
      frames_seen++;
      fork begin
        int d;
        d = (frames_seen % 7 == 3) ? 4000 : $urandom_range(1, 200);
        if (d > 1000) long_stalls++;
        repeat (d) @(posedge clk);
        wait (host_on);
        read_done <= 1; @(posedge clk); read_done <= 0;
      end join_none
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(3) != 0);

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    @(negedge clk) start_measure = 1;
    @(negedge clk) start_measure = 0;
    repeat (150000) @(posedge clk);
    $display("INFO blocks=%0d frames=%0d catchup_waits=%0d long_stalls=%0d words=%0d", blocks, frames, catchup_waits, long_stalls, nout);
    check(frames_seen > 20 && frames == 32'(frames_seen), $sformatf("frames %0d/%0d", frames, frames_seen));
    check(blocks > 60, "blocks moved");
    check(long_stalls > 2, "host stalls happened");
    check(catchup_waits > 0, "catch-up waits happened");
    check(!fifo_overflow && !ddr_overflow, "no overflow while the host keeps up on average");
    check(errors == 0, "no read and write in the same clock");
    // host stops answering: the DDR must fill and flag overflow
    host_on = 0;
    repeat (60000) @(posedge clk);
    check(ddr_overflow, "DDR overflow when the host stops");
    check(!fifo_overflow, "FIFO keeps draining into the DDR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
