// tb_xfer_fifo: small FIFO (16 entries, block of 8): 16-bit words written,
// read back four at a time as 64-bit entries in order; prog_full exactly at
// 8 entries; a write into the full memory is lost and flags overflow.
module tb_xfer_fifo;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, empty, prog_full, overflow;
  logic [15:0] wr_data;
  logic [63:0] rd_data;
  logic [4:0]  count;
  int checks = 0, failures = 0;

  xfer_fifo #(.DEPTH(16), .PROG_FULL(8)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en, .rd_data,
                                              .empty, .prog_full, .count, .overflow);
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

  int wn = 0, rn = 0;
  initial begin
    wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int round = 0; round < 20; round++) begin
      int nw;
      nw = 4 * $urandom_range(1, 4);
      if ((wn - rn) / 4 + nw / 4 > 16) nw = 0;
      for (int i = 0; i < nw; i++) begin
        @(negedge clk) wr_en = 1; wr_data = 16'(wn * 3 + 1); wn++;
      end
      @(negedge clk) wr_en = 0;
      #1 check(prog_full == (count >= 8), "prog_full threshold");
      check(count == 5'((wn - rn) / 4), $sformatf("count %0d", count));
      while (!empty && $urandom_range(3) != 0) begin
        for (int j = 0; j < 4; j++) check(rd_data[16*j +: 16] == 16'((rn + j) * 3 + 1), $sformatf("word %0d", rn + j));
        rd_en = 1; @(negedge clk); rd_en = 0; rn += 4;
      end
    end
    while (!empty) begin
      for (int j = 0; j < 4; j++) check(rd_data[16*j +: 16] == 16'((rn + j) * 3 + 1), "drain");
      rd_en = 1; @(negedge clk); rd_en = 0; rn += 4;
    end
    check(!overflow, "no overflow yet");
    for (int i = 0; i < 17 * 4; i++) begin @(negedge clk) wr_en = 1; wr_data = 16'(i); end
    @(negedge clk) wr_en = 0;
    #1 check(count == 16 && overflow, "full memory drops and flags overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
