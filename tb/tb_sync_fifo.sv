// tb_sync_fifo: self-checking test of the single-clock pixel FIFO.
// Random writes and reads against a reference queue; checks every word read,
// the fill level `count` every clock, full/empty, the overflow pulse on a
// write into a full FIFO, and the synchronous clear.
module tb_sync_fifo;
  localparam int W = 24, D = 8;
  logic clk = 0, rst = 1, clear = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, overflow, rd_valid, empty;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0, n_ovf = 0;
  logic [W-1:0] ref_q[$];
  logic [W-1:0] pend[$];   // popped, waiting for rd_valid

  always #5ns clk = ~clk;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always @(posedge clk) if (!rst) begin
    // outputs of the previous clock
    checks++;
    if (count != ref_q.size()) begin failures++; $display("FAIL: count %0d exp %0d", count, ref_q.size()); end
    if (full != (ref_q.size() == D) || empty != (ref_q.size() == 0)) begin failures++; $display("FAIL: flags"); end
    if (rd_valid) begin
      checks++;
      if (pend.size() == 0 || rd_data !== pend[0]) begin failures++; $display("FAIL: data %h", rd_data); end
      if (pend.size() != 0) void'(pend.pop_front());
    end
    if (overflow) n_ovf++;
    // this clock's operations, decided on the state before the edge
    if (clear) begin ref_q.delete(); pend.delete(); end
    else begin
      automatic bit do_rd = rd_en && ref_q.size() != 0;
      automatic bit do_wr = wr_en && ref_q.size() != D;
      if (do_rd) pend.push_back(ref_q.pop_front());
      if (do_wr) ref_q.push_back(wr_data);
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    // fill beyond full: one overflow
    repeat (D + 1) begin @(negedge clk); wr_en = 1; wr_data = W'($urandom); end
    @(negedge clk); wr_en = 0;
    @(negedge clk);
    checks++; if (n_ovf != 1) begin failures++; $display("FAIL: overflow pulses %0d", n_ovf); end
    // random traffic
    repeat (2000) begin
      @(negedge clk); wr_en = $urandom % 2; rd_en = $urandom % 2; wr_data = W'($urandom);
    end
    @(negedge clk); wr_en = 0; rd_en = 0;
    // clear
    @(negedge clk); wr_en = 1; @(negedge clk); wr_en = 0; clear = 1; @(negedge clk); clear = 0;
    @(negedge clk);
    checks++; if (!empty || count != 0) begin failures++; $display("FAIL: clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
