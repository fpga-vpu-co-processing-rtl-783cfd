// tb_lcd_fsm: self-checking test of the pixel-to-word packer.
// A behavioural pixel FIFO (registered read, random empty periods) feeds the
// block and a behavioural image buffer (random full periods) takes its words.
// For each pixel format, frames of random pixels are sent; the expected words
// are built here from the frame's byte stream (least significant byte first,
// the last word of a frame zero padded). Also checked: the packer keeps up
// with one pixel per clock, and nothing moves while disabled.
module tb_lcd_fsm;
  import cif_lcd_pkg::*;
  logic clk = 0, rst = 1;
  lcd_cfg_t cfg;
  logic pix_rd_en, pix_rd_valid = 0, pix_empty;
  logic [23:0] pix_rd_data = 0;
  logic buf_wr_en, buf_full = 0, frame_active;
  logic [31:0] buf_wr_data;
  int checks = 0, failures = 0, n_words = 0, n_reads = 0;
  logic [23:0] src_q[$];
  logic [31:0] exp_q[$];
  bit stall_src = 0, stall_dst = 0;

  always #5ns clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  lcd_fsm dut (.*);

  assign pix_empty = (src_q.size() == 0) || stall_src;
  always @(posedge clk) begin
    pix_rd_valid <= 0;
    if (pix_rd_en && !rst) begin
      checks++; n_reads++;
      if (pix_empty) begin failures++; $display("FAIL: read while empty"); end
      else begin pix_rd_data <= src_q.pop_front(); pix_rd_valid <= 1; end
    end
    if (buf_wr_en && !rst) begin
      checks++; n_words++;
      if (buf_full) begin failures++; $display("FAIL: write while full"); end
      else if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected word %h at %t src %0d", buf_wr_data, $time, src_q.size()); end
      else begin
        automatic logic [31:0] e = exp_q.pop_front();
        if (buf_wr_data !== e) begin failures++; $display("FAIL: word %h exp %h", buf_wr_data, e); end
      end
    end
  end
  always @(negedge clk) buf_full = stall_dst ? ($urandom % 3 == 0) : 1'b0;

  task automatic make_frame(input int w, input int h, input int bpp);
    byte unsigned bytes[$];
    for (int p = 0; p < w * h; p++) begin
      automatic logic [23:0] px = 24'($urandom);
      src_q.push_back(px);              // upper bits beyond the format are ignored
      for (int b = 0; b < bpp; b++) bytes.push_back(px[8*b +: 8]);
    end
    while (bytes.size() % 4 != 0) bytes.push_back(0);
    for (int i = 0; i < bytes.size(); i += 4)
      exp_q.push_back({bytes[i+3], bytes[i+2], bytes[i+1], bytes[i]});
  endtask

  task automatic wait_done(input int limit);
    int n = 0;
    while ((exp_q.size() != 0 || src_q.size() != 0) && n < limit) begin @(posedge clk); n++; end
  endtask

  initial begin
    cfg = '0; cfg.width = 16'd5; cfg.height = 16'd3;
    repeat (3) @(negedge clk); rst = 0;
    make_frame(5, 3, 1);
    repeat (20) @(negedge clk);
    checks++; if (n_reads != 0) begin failures++; $display("FAIL: moved while disabled"); end
    cfg.enable = 1; cfg.pix_fmt = 2'(PIX_8);
    wait_done(1000); repeat (3) @(negedge clk); cfg.enable = 0; repeat (3) @(negedge clk);
    for (int fmt = 1; fmt <= 3; fmt++) begin
      cfg.pix_fmt = 2'(fmt); cfg.width = 16'(6 + fmt); cfg.height = 16'd3;
      stall_dst = 1;
      for (int f = 0; f < 3; f++) make_frame(6 + fmt, 3, fmt);
      cfg.enable = 1;
      fork
        begin repeat (60) begin @(negedge clk); stall_src = ($urandom % 3 == 0); end stall_src = 0; end
        wait_done(5000);
      join
      wait_done(5000);
      repeat (3) @(negedge clk); cfg.enable = 0; stall_dst = 0; repeat (3) @(negedge clk);
      checks++; if (exp_q.size() != 0 || src_q.size() != 0) begin failures++; $display("FAIL: fmt %0d left %0d words", fmt, exp_q.size()); end
    end
    // rate: 256 pixels read in about 256 clocks in every format
    for (int fmt = 1; fmt <= 3; fmt++) begin
      int t0, t1, n0;
      cfg.pix_fmt = 2'(fmt); cfg.width = 16'd64; cfg.height = 16'd4;
      make_frame(64, 4, fmt);
      n0 = n_reads;
      @(negedge clk); cfg.enable = 1;
      while (n_reads == n0) @(posedge clk);
      t0 = cyc;
      while (n_reads < n0 + 256) @(posedge clk);
      t1 = cyc;
      checks++;
      if (t1 - t0 > 256 + 2) begin failures++; $display("FAIL: fmt %0d took %0d clocks for 256 pixels", fmt, t1 - t0); end
      wait_done(100);
      repeat (3) @(negedge clk); cfg.enable = 0; repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
