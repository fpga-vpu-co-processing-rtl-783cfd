// tb_crc16_xmodem: self-checking test of the per-pixel CRC-16/XMODEM unit.
// The standard check value of CRC-16/XMODEM over the ASCII string "123456789"
// is 0x31C3; the test feeds that string as nine 8-bit pixels and as three
// 24-bit pixels, and feeds random frames in all three widths against a
// bit-serial reference written here (one message bit per step through the
// polynomial 0x1021). It also checks that `init` restarts the CRC and that
// `crc_next` equals the register one clock later.
module tb_crc16_xmodem;
  logic clk = 0, rst = 1, init = 0, en = 0;
  logic [1:0] nbytes = 1;
  logic [23:0] pixel = 0;
  logic [15:0] crc, crc_next;
  int checks = 0, failures = 0;

  always #5ns clk = ~clk;
  crc16_xmodem dut (.*);

  function automatic logic [15:0] ref_bits(input logic [15:0] c, input logic [7:0] b);
    for (int i = 7; i >= 0; i--) begin
      logic fb; fb = c[15] ^ b[i];
      c = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  task automatic check(input logic [15:0] exp, input string what);
    checks++;
    if (crc !== exp) begin failures++; $display("FAIL %s: crc %h exp %h", what, crc, exp); end
  endtask

  initial begin
    logic [15:0] r, nxt_seen;
    byte msg[9] = '{"1","2","3","4","5","6","7","8","9"};
    repeat (2) @(negedge clk); rst = 0;
    // "123456789" as 8-bit pixels
    init = 1; en = 1; nbytes = 1;
    foreach (msg[i]) begin pixel = {16'h0, msg[i]}; @(negedge clk); init = 0; end
    en = 0; @(negedge clk);
    check(16'h31C3, "8-bit check string");
    // as 24-bit pixels "123" "456" "789"
    init = 1; en = 1; nbytes = 3;
    for (int i = 0; i < 9; i += 3) begin pixel = {msg[i], msg[i+1], msg[i+2]}; @(negedge clk); init = 0; end
    en = 0; @(negedge clk);
    check(16'h31C3, "24-bit check string");
    // random frames in each width
    for (int w = 1; w <= 3; w++) begin
      for (int f = 0; f < 5; f++) begin
        r = 16'h0000; init = 1; en = 1; nbytes = 2'(w);
        for (int p = 0; p < 50; p++) begin
          pixel = 24'($urandom);
          for (int b = w - 1; b >= 0; b--) r = ref_bits(r, pixel[8*b +: 8]);
          nxt_seen = 0;
          #1ns nxt_seen = crc_next;
          @(negedge clk); init = 0;
          checks++; if (crc !== nxt_seen) begin failures++; $display("FAIL: crc_next"); end
        end
        en = 0; @(negedge clk);
        check(r, $sformatf("random %0d-byte frame", w));
      end
    end
    // enable low holds the value
    r = crc; pixel = 24'h123456; repeat (3) @(negedge clk);
    check(r, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
