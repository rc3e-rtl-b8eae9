// tb_async_fifo: self-checking test of the dual-clock stream FIFO.
// Writer and reader run on unrelated clocks (10 ns and 7 ns). The test
// checks empty after reset, fills the FIFO with the reader stopped and
// checks that full rises after exactly DEPTH words and wcount reads DEPTH,
// then streams random data with random stalls on both sides and compares
// every word read with a reference queue (order and value).
module tb_async_fifo;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned NWORDS = 400;

  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [31:0] wdata = 0, rdata;
  logic [$clog2(DEPTH):0] wcount;

  int checks = 0, failures = 0;
  logic [31:0] ref_q[$];
  int sent = 0, got = 0;
  bit reader_on = 0, writer_on = 0;

  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  async_fifo #(.DATA_W(32), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // writer: drives on the falling edge
  always @(negedge wclk) begin
    wr_en <= 0;
    if (writer_on && sent < NWORDS && !full && ($urandom_range(3) != 0)) begin
      logic [31:0] v;
      v = $urandom;
      wr_en <= 1;
      wdata <= v;
      ref_q.push_back(v);
      sent++;
    end
  end

  // reader: pops on the falling edge, the word shown is compared when popped
  always @(negedge rclk) begin
    rd_en <= 0;
    if (reader_on && !empty && ($urandom_range(2) != 0)) begin
      rd_en <= 1;
      if (ref_q.size() == 0) check(0, "read with empty reference");
      else check(rdata == ref_q.pop_front(), $sformatf("word %0d", got));
      got++;
    end
  end

  initial begin
    repeat (3) @(posedge wclk);
    wrst = 0; rrst = 0;
    repeat (3) @(posedge rclk);
    check(empty && !full, "empty after reset");
    // fill with reader stopped
    writer_on = 1;
    wait (sent == DEPTH);
    writer_on = 0;
    repeat (6) @(posedge wclk);
    check(full, "full after DEPTH words");
    check(wcount == DEPTH, $sformatf("wcount %0d", wcount));
    // stream the rest
    reader_on = 1;
    writer_on = 1;
    wait (got == NWORDS);
    repeat (10) @(posedge rclk);
    check(empty, "empty at the end");
    check(ref_q.size() == 0, "all words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
