// tb_cdc_handshake: self-checking test of the handshake synchroniser.
// Source (7 ns clock) and destination (13 ns clock) are unrelated. The source
// value changes at random times. Checked: every value that appears on dst_data
// is one the source held (never a mix of two), dst_update pulses exactly when
// dst_data changes or is reloaded, and whenever the source has held a value
// for 40 source clocks the destination shows that value.
module tb_cdc_handshake;
  localparam int W = 40;
  logic src_clk = 0, dst_clk = 0, src_rst = 1, dst_rst = 1;
  logic [W-1:0] src_data = '0, dst_data, prev_dst;
  logic dst_update;
  int checks = 0, failures = 0, n_upd = 0, n_track = 0;
  bit seen[logic [W-1:0]];

  always #3.5ns src_clk = ~src_clk;
  always #6.5ns dst_clk = ~dst_clk;

  cdc_handshake #(.WIDTH(W)) dut (.*);

  // source clocks since src_data last changed
  logic [W-1:0] src_d = '0;
  int stable = 0;
  always @(posedge src_clk) begin
    seen[src_data] = 1;
    stable = (src_data == src_d) ? stable + 1 : 0;
    src_d = src_data;
  end

  always @(posedge dst_clk) if (!dst_rst) begin
    checks++;
    if (!seen.exists(dst_data)) begin failures++; $display("FAIL: torn value %h", dst_data); end
    if (dst_data != prev_dst && !dst_update) begin failures++; $display("FAIL: change without update"); end
    if (dst_update) n_upd++;
    // a value held for 40 source clocks (280 ns) must have crossed by now
    if (stable >= 40) begin
      checks++; n_track++;
      if (dst_data !== src_d) begin failures++; $display("FAIL: %h not followed, dst %h", src_d, dst_data); end
    end
    prev_dst = dst_data;
  end

  initial begin
    seen['0] = 1; prev_dst = '0;
    #30ns; src_rst = 0; dst_rst = 0;
    repeat (300) begin
      @(negedge src_clk);
      if ($urandom % 4 == 0) src_data = {$urandom, 8'($urandom)};
    end
    repeat (3000) begin                         // rarer changes: values settle
      @(negedge src_clk);
      if ($urandom % 64 == 0) src_data = {$urandom, 8'($urandom)};
    end
    src_data = 40'hA5_1234_5678;
    repeat (20) @(negedge dst_clk);
    checks++; if (dst_data !== src_data) begin failures++; $display("FAIL: final %h exp %h", dst_data, src_data); end
    checks++; if (n_track < 100) begin failures++; $display("FAIL: only %0d tracking checks", n_track); end
    checks++; if (n_upd < 10) begin failures++; $display("FAIL: only %0d updates", n_upd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
