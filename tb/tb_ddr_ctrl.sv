// tb_ddr_ctrl: DDR controller with a 40-word circular memory and 12-word
// frames, behind the random-stall memory model. Blocks of numbered words are
// written, frames are read and must return the same numbers in order, across
// the address wrap. Also checks: ReadFrame Ready only with a whole frame
// stored, one WriteBlock Done and ReadFrame Done per command, no read and
// write together, and that writing into a full memory drops words and sets
// overflow.
module tb_ddr_ctrl;
  localparam int AW = 6, DEPTH = 40, FRAME = 12;
  logic clk = 0, rst_n = 0;
  logic write_block_start = 0, read_frame_start = 0, write_block_done, read_frame_ready, read_frame_done;
  logic write_block_ready, block_read_done = 0, pipe_busy = 0, in_valid = 0, in_ready;
  logic [479:0] in_data = '0, mem_wr_data, mem_rd_data, out_data;
  logic mem_wr_en, mem_rd_en, mem_rdy, mem_rd_valid, out_valid, out_ready = 1, overflow;
  logic [AW-1:0] mem_wr_addr, mem_rd_addr;
  logic [AW:0] used;
  int writes, reads, errors;
  int checks = 0, failures = 0;

  ddr_ctrl #(.AW(AW), .DEPTH(DEPTH), .FRAME(FRAME)) dut (.*);
  tb_ddr_model #(.AW(AW), .LAT(5), .RDY_PCT(70)) u_mem (
    .clk, .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .rd_en(mem_rd_en),
    .rd_addr(mem_rd_addr), .rdy(mem_rdy), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .writes, .reads, .errors);
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

  int wn = 0, rn = 0, wdone = 0, rdone = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      check(out_data[31:0] == 32'(rn) && out_data[479:448] == ~32'(rn), $sformatf("frame word %0d", rn));
      rn++;
    end
    if (write_block_done) wdone++;
    if (read_frame_done) rdone++;
    if (in_valid && in_ready && !overflow) wn++;
  end

  task automatic write_block(input int n);
    int sent;
    sent = 0;
    @(negedge clk) write_block_start = 1;
    @(negedge clk) write_block_start = 0;
    while (sent < n) begin
      in_valid = ($urandom_range(3) != 0);
      in_data = {~32'(wn), 416'(0), 32'(wn)};
      @(posedge clk);
      if (in_valid && in_ready) sent++;
      @(negedge clk);
    end
    in_valid = 0;
    block_read_done = 1;
    @(negedge clk) block_read_done = 0;
    while (write_block_ready) @(negedge clk);
  endtask

  task automatic read_frame();
    check(read_frame_ready, "frame ready before read");
    @(negedge clk) read_frame_start = 1;
    @(negedge clk) read_frame_start = 0;
    while (!read_frame_done) begin
      out_ready = ($urandom_range(3) != 0);
      @(negedge clk);
    end
    out_ready = 1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int round = 0; round < 12; round++) begin
      write_block(8);
      #1 check(read_frame_ready == (used >= FRAME), "ReadFrame Ready rule");
      check(used == (AW+1)'(wn - rn), "used words");
      while (used >= FRAME) read_frame();
    end
    @(negedge clk);
    check(wdone == 12, $sformatf("write done pulses %0d", wdone));
    check(rdone == rn / FRAME && rn == 96, $sformatf("frames %0d words %0d", rdone, rn));
    check(errors == 0, "no write and read in the same clock");
    check(!overflow, "no overflow yet");
    for (int b = 0; b < 6; b++) write_block(8);
    check(overflow && used == DEPTH, "full memory drops words and flags overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
