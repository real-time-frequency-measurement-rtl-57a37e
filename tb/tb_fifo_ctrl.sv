// tb_fifo_ctrl: with a block of 10 entries, ReadBlock Ready follows
// prog_full; after WriteBlock Ready it issues exactly 10 reads, only while
// the FIFO is not empty and the SIPO is ready, pulses ReadBlock Done once,
// and waits for WriteBlock Ready to fall before starting again.
module tb_fifo_ctrl;
  logic clk = 0, rst_n = 0;
  logic fifo_prog_full = 0, fifo_empty = 1, fifo_rden, down_ready = 1, write_block_ready = 0;
  logic read_block_ready, read_block_done;
  int checks = 0, failures = 0;

  fifo_ctrl #(.BLOCK(10)) dut (.clk, .rst_n, .fifo_prog_full, .fifo_empty, .fifo_rden, .down_ready,
                               .write_block_ready, .read_block_ready, .read_block_done);
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

  int reads = 0, dones = 0;
  always @(posedge clk) if (rst_n) begin
    if (fifo_rden) begin
      reads++;
      check(!fifo_empty && down_ready, "read only when data and room");
    end
    if (read_block_done) dones++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int b = 0; b < 5; b++) begin
      @(negedge clk) fifo_prog_full = 1;
      #1 check(read_block_ready, "ReadBlock Ready follows prog_full");
      @(negedge clk) write_block_ready = 1; fifo_prog_full = 0;
      reads = 0;
      for (int c = 0; c < 100; c++) begin
        @(negedge clk);
        fifo_empty = ($urandom_range(3) == 0);
        down_ready = ($urandom_range(3) != 0);
      end
      check(reads == 10, $sformatf("block %0d: %0d reads", b, reads));
      check(dones == b + 1, "one ReadBlock Done per block");
      fifo_empty = 0; down_ready = 1;
      repeat (5) @(negedge clk);
      check(reads == 10, "no reads until WriteBlock Ready falls");
      write_block_ready = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
