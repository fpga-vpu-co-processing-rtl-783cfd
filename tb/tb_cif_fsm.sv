// tb_cif_fsm: self-checking test of the word-to-pixel unpacker.
// A behavioural source stands in for the CIF image buffer (one-clock read
// latency, random empty periods) and a behavioural sink for the pixel FIFO
// (random full periods). For each pixel format, frames of random words are
// sent; the expected pixel stream is built here from the byte stream of each
// frame (least significant byte first, trailing bytes of the last word
// dropped). Also checked: one pixel per clock when neither side stalls, and
// that nothing moves while the configuration is disabled.
module tb_cif_fsm;
  import cif_lcd_pkg::*;
  logic clk = 0, rst = 1;
  cif_cfg_t cfg;
  logic buf_rd_en, buf_rd_valid = 0, buf_empty;
  logic [31:0] buf_rd_data = 0;
  logic pix_wr_en, pix_full = 0, frame_active;
  logic [23:0] pix_wr_data;
  int checks = 0, failures = 0;
  logic [31:0] src_q[$];
  logic [23:0] exp_q[$];
  bit   stall_src = 0, stall_dst = 0;
  int   n_pix = 0;

  always #5ns clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  cif_fsm dut (.*);

  assign buf_empty = (src_q.size() == 0) || stall_src;
  always @(posedge clk) begin
    buf_rd_valid <= 0;
    if (buf_rd_en && !rst) begin
      checks++;
      if (buf_empty) begin failures++; $display("FAIL: read while empty"); end
      else begin buf_rd_data <= src_q.pop_front(); buf_rd_valid <= 1; end
    end
    if (pix_wr_en && !rst) begin
      checks++; n_pix++;
      if (pix_full) begin failures++; $display("FAIL: write while full"); end
      else if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected pixel %h", pix_wr_data); end
      else begin
        logic [23:0] e; e = exp_q.pop_front();
        if (pix_wr_data !== e) begin failures++; $display("FAIL: pixel %h exp %h", pix_wr_data, e); end
      end
    end
  end
  always @(negedge clk) begin
    pix_full = stall_dst ? ($urandom % 3 == 0) : 1'b0;
  end

  // queue one frame's words and its expected pixels
  task automatic make_frame(input int w, input int h, input int bpp);
    byte unsigned bytes[$];
    int nwords = (w * h * bpp + 3) / 4;
    for (int i = 0; i < nwords; i++) begin
      logic [31:0] word = $urandom;
      src_q.push_back(word);
      for (int b = 0; b < 4; b++) bytes.push_back(word[8*b +: 8]);
    end
    for (int p = 0; p < w * h; p++) begin
      logic [23:0] px = 0;
      for (int b = 0; b < bpp; b++) px[8*b +: 8] = bytes[p*bpp + b];
      exp_q.push_back(px);
    end
  endtask

  task automatic wait_done(input int limit);
    int n = 0;
    while ((exp_q.size() != 0 || src_q.size() != 0) && n < limit) begin @(posedge clk); n++; end
  endtask

  initial begin
    cfg = '0; cfg.width = 16'd5; cfg.height = 16'd3;
    repeat (3) @(negedge clk); rst = 0;
    // disabled: words present, nothing read
    make_frame(5, 3, 1);
    repeat (20) @(negedge clk);
    checks++; if (src_q.size() != 4 || n_pix != 0) begin failures++; $display("FAIL: moved while disabled"); end
    cfg.enable = 1; cfg.pix_fmt = 2'(PIX_8);
    wait_done(1000); @(negedge clk); @(negedge clk); cfg.enable = 0; repeat (5) @(negedge clk);
    // each format, odd sizes so frames end inside a word, with stalls
    for (int fmt = 1; fmt <= 3; fmt++) begin
      cfg.pix_fmt = 2'(fmt); cfg.width = 16'(7 + fmt); cfg.height = 16'd5;
      stall_src = 1; stall_dst = 1;
      for (int f = 0; f < 3; f++) make_frame(7 + fmt, 5, fmt);
      cfg.enable = 1;
      fork
        begin repeat (40) begin @(negedge clk); stall_src = ($urandom % 3 == 0); end stall_src = 0; end
        wait_done(5000);
      join
      wait_done(5000);
      @(negedge clk); @(negedge clk); cfg.enable = 0; stall_dst = 0; repeat (5) @(negedge clk);
      checks++; if (exp_q.size() != 0 || src_q.size() != 0) begin failures++; $display("FAIL: fmt %0d left %0d pixels", fmt, exp_q.size()); end
    end
    // rate: one pixel per clock in every format without stalls
    for (int fmt = 1; fmt <= 3; fmt++) begin
      int t0, t1, n0;
      cfg.pix_fmt = 2'(fmt); cfg.width = 16'd64; cfg.height = 16'd4;
      make_frame(64, 4, fmt);
      n0 = n_pix;
      @(negedge clk); cfg.enable = 1;
      while (n_pix == n0) @(posedge clk);
      t0 = cyc;
      while (n_pix < n0 + 256) @(posedge clk);
      t1 = cyc;
      checks++;
      if (t1 - t0 > 256 + 2) begin failures++; $display("FAIL: fmt %0d took %0d clocks for 256 pixels", fmt, t1 - t0); end
      @(negedge clk); cfg.enable = 0; repeat (5) @(negedge clk);
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
