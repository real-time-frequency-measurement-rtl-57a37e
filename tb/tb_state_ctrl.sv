// tb_state_ctrl: the state controller against small reactive models of the
// FIFO and DDR controllers. Checks: nothing before Start Measure; block moves
// win over frame reads; a frame read needs ReadFrame Ready and the host's
// Read Done for the previous frame; each move waits for both Done pulses in
// either order; the block, frame and catch-up-wait counters match the
// commands seen.
module tb_state_ctrl;
  logic clk = 0, rst_n = 0, start_measure = 0, read_done = 0;
  logic read_block_ready = 0, read_block_done = 0, write_block_done = 0, read_frame_ready = 0, read_frame_done = 0;
  logic write_block_start, read_frame_start;
  logic [31:0] blocks, frames, catchup_waits;
  int checks = 0, failures = 0;

  state_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nwb = 0, nrf = 0, busy = 0, host_owes = 0, waits_seen = 0;
  int ddr_words = 0;
  logic rbr_q = 0, rfr_q = 0;
  always @(posedge clk) begin rbr_q <= read_block_ready; rfr_q <= read_frame_ready; end
  bit fifo_full_flag = 0;
  always @(posedge clk) if (rst_n) begin
    if (write_block_start) begin
      check(busy == 0, "one command at a time");
      check(rbr_q, "block move only with a block ready");
      nwb++; busy = 1;
      fork begin
        int a, b;
        a = $urandom_range(2, 30); b = $urandom_range(2, 30);
        fork
          begin repeat (a) @(posedge clk); read_block_done <= 1; @(posedge clk); read_block_done <= 0; end
          begin repeat (b) @(posedge clk); write_block_done <= 1; @(posedge clk); write_block_done <= 0; end
        join
        ddr_words += 3; busy = 0;
      end join_none
    end
    if (read_frame_start) begin
      check(busy == 0, "one command at a time");
      check(rfr_q && !rbr_q, "frame read only when ready and no block waiting");
      check(host_owes == 0, "frame read only after host Read Done");
      nrf++; busy = 1; host_owes = 1;
      fork begin
        repeat ($urandom_range(5, 40)) @(posedge clk);
        read_frame_done <= 1; @(posedge clk); read_frame_done <= 0;
        ddr_words -= 5; busy = 0;
        repeat ($urandom_range(1, 120)) @(posedge clk);
        read_done <= 1; @(posedge clk); read_done <= 0; host_owes = 0;
      end join_none
    end
  end
  always @(negedge clk) begin
    read_frame_ready = (ddr_words >= 5);
    if (busy == 0 && !read_block_ready && $urandom_range(19) == 0) read_block_ready = 1;
    if (write_block_start) read_block_ready = 0;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    read_block_ready = 1;
    repeat (20) @(posedge clk);
    check(nwb == 0 && blocks == 0, "idle before Start Measure");
    @(negedge clk) start_measure = 1;
    @(negedge clk) start_measure = 0;
    repeat (20000) @(posedge clk);
    wait (busy == 0);
    @(negedge clk) @(negedge clk);
    check(blocks == 32'(nwb) && nwb > 50, $sformatf("blocks %0d/%0d", blocks, nwb));
    check(frames == 32'(nrf) && nrf > 20, $sformatf("frames %0d/%0d", frames, nrf));
    check(catchup_waits > 0, "catch-up waits counted");
    $display("INFO blocks=%0d frames=%0d catchup_waits=%0d", blocks, frames, catchup_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
