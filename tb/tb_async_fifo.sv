// tb_async_fifo: self-checking test of the dual-clock FIFO.
// Writer and reader run on unrelated clocks (7 ns and 11 ns) with random
// enables. A queue of written words is the reference: every word read must be
// the oldest unread word; writes while full and reads while empty must not
// change the stream; full must appear after DEPTH writes without reads, and
// empty after everything is drained.
module tb_async_fifo;
  localparam int W = 16, D = 16;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic wr_en = 0, rd_en = 0, full, empty, rd_valid;
  logic [W-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q[$];
  int n_written = 0, n_read = 0;

  always #3.5ns wclk = ~wclk;
  always #5.5ns rclk = ~rclk;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .wr_en, .wr_data, .full,
    .rd_clk(rclk), .rd_rst(rrst), .rd_en, .rd_data, .rd_valid, .empty);

  // scoreboard: writes
  always @(posedge wclk) if (!wrst && wr_en && !full) begin ref_q.push_back(wr_data); n_written++; end
  // scoreboard: reads
  always @(posedge rclk) if (!rrst && rd_valid) begin
    checks++;
    if (ref_q.size() == 0) begin failures++; $display("FAIL: read with empty reference"); end
    else begin
      logic [W-1:0] e; e = ref_q.pop_front();
      if (rd_data !== e) begin failures++; $display("FAIL: got %h exp %h", rd_data, e); end
    end
    n_read++;
  end

  task automatic fill_until_full();
    int n = 0;
    @(negedge wclk);
    while (!full && n < 4*D) begin wr_en = 1; wr_data = W'($urandom); @(negedge wclk); n++; end
    wr_en = 0;
  endtask

  initial begin
    #40ns; wrst = 0; rrst = 0;
    // 1. fill to full with reader stopped
    fill_until_full();
    checks++; if (ref_q.size() != D) begin failures++; $display("FAIL: full after %0d words", ref_q.size()); end
    // write while full is ignored
    @(negedge wclk); wr_en = 1; wr_data = 16'hDEAD; @(negedge wclk); wr_en = 0;
    checks++; if (ref_q.size() != D) begin failures++; $display("FAIL: write while full accepted"); end
    // 2. drain
    @(negedge rclk); rd_en = 1;
    repeat (3*D) @(negedge rclk);
    rd_en = 0;
    repeat (4) @(negedge rclk);
    checks++; if (!empty || ref_q.size() != 0) begin failures++; $display("FAIL: not empty after drain"); end
    // 3. random traffic in both domains
    fork
      begin
        repeat (3000) begin @(negedge wclk); wr_en = ($urandom % 3) != 0; wr_data = W'($urandom); end
        @(negedge wclk); wr_en = 0;
      end
      begin
        repeat (2000) begin @(negedge rclk); rd_en = ($urandom % 4) != 0; end
        rd_en = 1; repeat (2*D + 10) @(negedge rclk); rd_en = 0;
      end
    join
    repeat (10) @(negedge rclk);
    checks++; if (ref_q.size() != 0 || n_read != n_written) begin
      failures++; $display("FAIL: %0d written %0d read", n_written, n_read); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
