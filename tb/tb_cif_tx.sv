// tb_cif_tx: self-checking test of the CIF transmitter.
// A behavioural pixel FIFO (registered read, fill level) feeds the block. A
// monitor rebuilds every frame from the pins: vsync bounds a frame, each run
// of hsync high is one line. Checked against values computed here: every
// pixel, the line count and length, the CRC-16/XMODEM pixels at the end of the
// last line (two bytes in 8-bit mode, one pixel otherwise), the blanking
// lengths, that hsync is never broken inside a line even when the FIFO is
// filled slowly (the transmitter must wait for a whole line), and the status
// (frame count, CRC, lines and pixels). Frames: 8, 16 and 24-bit with CRC,
// 8-bit without CRC back to back, then 8-bit frames of random small sizes with
// CRC.
module tb_cif_tx;
  import cif_lcd_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst = 1;
  cif_cfg_t cfg;
  logic pix_rd_en, pix_rd_valid = 0;
  logic [23:0] pix_rd_data = 0;
  logic [$clog2(DEPTH):0] pix_count;
  logic cif_hsync, cif_vsync, frame_done;
  logic [23:0] cif_pixel;
  cif_status_t status;
  int checks = 0, failures = 0;

  always #5ns clk = ~clk;
  cif_tx #(.FIFO_DEPTH(DEPTH)) dut (.*);

  // behavioural FIFO
  logic [23:0] fifo[$];
  assign pix_count = ($clog2(DEPTH)+1)'(fifo.size());
  always @(posedge clk) begin
    pix_rd_valid <= 0;
    if (pix_rd_en && !rst) begin
      checks++;
      if (fifo.size() == 0) begin failures++; $display("FAIL: read from empty FIFO"); end
      else begin pix_rd_data <= fifo.pop_front(); pix_rd_valid <= 1; end
    end
  end

  function automatic logic [15:0] crc_ref(input logic [15:0] c, input logic [7:0] b);
    for (int i = 7; i >= 0; i--) begin
      logic fb; fb = c[15] ^ b[i];
      c = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  // expected frames
  logic [23:0] exp_pix[$];
  logic [15:0] exp_crc[$];
  int exp_w[$], exp_h[$], exp_bpp[$], exp_crcen[$], exp_hb[$], exp_vb[$];

  // monitor
  bit v_d = 0, h_d = 0;
  int run = 0, lows = 0, line_no = 0, frames_seen = 0, since_v = 0, line_waits = 0;
  logic [23:0] line_buf[$];
  always @(posedge clk) if (!rst) begin
    if (cif_hsync && !cif_vsync) begin failures++; $display("FAIL: hsync outside vsync"); end
    if (cif_vsync && !v_d) begin line_no = 0; since_v = 0; lows = 0; end
    if (cif_vsync) since_v++;
    if (cif_hsync) line_buf.push_back(cif_pixel);
    if (cif_vsync && cif_hsync && !h_d) begin
      checks++;
      if (line_no == 0 && since_v - 1 < exp_vb[0]) begin failures++; $display("FAIL: vblank %0d", since_v - 1); end
      if (line_no > 0 && lows < exp_hb[0]) begin failures++; $display("FAIL: hblank %0d", lows); end
    end
    if (!cif_hsync) lows++; else lows = 0;
    if (!cif_hsync && h_d) begin       // a line ended
      automatic int w = exp_w[0], h = exp_h[0], bpp = exp_bpp[0];
      automatic bit last = (line_no == h - 1);
      automatic int extra = (last && exp_crcen[0]) ? ((bpp == 1) ? 2 : 1) : 0;
      checks++;
      if (line_buf.size() != w + extra) begin failures++; $display("FAIL: line %0d has %0d pixels, exp %0d", line_no, line_buf.size(), w + extra); end
      for (int i = 0; i < w && i < line_buf.size(); i++) begin
        automatic logic [23:0] e = exp_pix.pop_front();
        checks++; if (line_buf[i] !== e) begin failures++; $display("FAIL: pixel %h exp %h", line_buf[i], e); end
      end
      if (extra != 0 && line_buf.size() == w + extra) begin
        automatic logic [15:0] got = (bpp == 1) ? {line_buf[w][7:0], line_buf[w+1][7:0]} : line_buf[w][15:0];
        checks++; if (got !== exp_crc[0]) begin failures++; $display("FAIL: CRC pixel %h exp %h", got, exp_crc[0]); end
        if (bpp != 1) begin checks++; if (line_buf[w][23:16] != 0) begin failures++; $display("FAIL: CRC pixel high byte"); end end
      end
      line_buf.delete();
      line_no++;
    end
    if (!cif_vsync && v_d) begin       // a frame ended
      checks++;
      if (line_no != exp_h[0]) begin failures++; $display("FAIL: %0d lines, exp %0d", line_no, exp_h[0]); end
      checks++;
      if (status.crc !== exp_crc[0] || status.frames_tx != frames_seen + 1) begin
        failures++; $display("FAIL: status CRC %h exp %h, frames %0d", status.crc, exp_crc[0], status.frames_tx); end
      frames_seen++;
      void'(exp_w.pop_front()); void'(exp_h.pop_front()); void'(exp_bpp.pop_front());
      void'(exp_crcen.pop_front()); void'(exp_hb.pop_front()); void'(exp_vb.pop_front());
      void'(exp_crc.pop_front());
    end
    // the transmitter waiting with a partial line in the FIFO
    if (cif_vsync && !cif_hsync && fifo.size() > 0 && fifo.size() < exp_w[0] && lows > exp_hb[0] + 2) line_waits++;
    v_d = cif_vsync; h_d = cif_hsync;
  end

  task automatic send_frame(input int w, input int h, input int fmt, input bit crc_en, input int slow);
    logic [15:0] c = 0;
    int bpp = fmt;
    exp_w.push_back(w); exp_h.push_back(h); exp_bpp.push_back(bpp); exp_crcen.push_back(crc_en);
    exp_hb.push_back(cfg.hblank); exp_vb.push_back(cfg.vblank);
    for (int p = 0; p < w * h; p++) begin
      logic [23:0] px = 24'($urandom);
      if (bpp == 1) px[23:8] = 0;
      if (bpp == 2) px[23:16] = 0;
      for (int b = bpp - 1; b >= 0; b--) c = crc_ref(c, px[8*b +: 8]);
      exp_pix.push_back(px);
      while (fifo.size() >= DEPTH) @(negedge clk);
      fifo.push_back(px);
      if (slow) repeat (slow) @(negedge clk);
    end
    exp_crc.push_back(c);
  endtask

  task automatic wait_frames(input int n);
    int k = 0;
    while (frames_seen < n && k < 100000) begin @(negedge clk); k++; end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk); rst = 0;
    // 8-bit, CRC on
    cfg = '{enable: 1, crc_en: 1, pix_fmt: 2'(PIX_8), width: 16'd12, height: 16'd4, hblank: 16'd3, vblank: 16'd5};
    send_frame(12, 4, 1, 1, 0);
    wait_frames(1);
    repeat (2) @(negedge clk);
    checks++;
    if (status.frames_tx != 1 || status.lines_tx != 4 || status.pixels_tx != 48) begin
      failures++; $display("FAIL: status after frame 1: %0d %0d %0d", status.frames_tx, status.lines_tx, status.pixels_tx); end
    // 16-bit and 24-bit with CRC, slow filling (whole-line wait), hblank 0
    cfg.pix_fmt = 2'(PIX_16); cfg.width = 16'd20; cfg.height = 16'd3; cfg.hblank = 16'd0; cfg.vblank = 16'd1;
    send_frame(20, 3, 2, 1, 2);
    wait_frames(2);
    cfg.pix_fmt = 2'(PIX_24); cfg.width = 16'd64; cfg.height = 16'd2;
    send_frame(64, 2, 3, 1, 1);
    wait_frames(3);
    // 8-bit without CRC, several frames back to back
    cfg.pix_fmt = 2'(PIX_8); cfg.crc_en = 0; cfg.width = 16'd9; cfg.height = 16'd5; cfg.hblank = 16'd2;
    for (int f = 0; f < 3; f++) send_frame(9, 5, 1, 0, 0);
    wait_frames(6);
    // 8-bit with CRC, random small sizes
    cfg.crc_en = 1;
    for (int f = 0; f < 8; f++) begin
      automatic int w = 1 + $urandom % 30, h = 1 + $urandom % 4;
      cfg.width = 16'(w); cfg.height = 16'(h);
      send_frame(w, h, 1, 1, 0);
      wait_frames(7 + f);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (frames_seen != 14 || status.frames_tx != 14) begin failures++; $display("FAIL: frames %0d status %0d", frames_seen, status.frames_tx); end
    checks++;
    if (line_waits == 0) begin failures++; $display("FAIL: whole-line wait never seen"); end
    $display("line waits seen: %0d", line_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
