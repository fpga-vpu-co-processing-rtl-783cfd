// tb_lcd_rx: self-checking test of the LCD receiver.
// A behavioural VPU drives frames on the LCD pins: vsync around the frame,
// hsync around each line, and valid dropped at random inside lines. Checked
// against values computed here: each pixel written to the pixel FIFO (masked to
// the configured width), that nothing is taken outside hsync/vsync/valid or
// while disabled, the frame count, the pixel count and CRC-16/XMODEM of each
// frame, and the sticky overflow flag when the FIFO reports full.
module tb_lcd_rx;
  import cif_lcd_pkg::*;
  logic clk = 0, rst = 1;
  lcd_cfg_t cfg;
  logic lcd_valid = 0, lcd_hsync = 0, lcd_vsync = 0;
  logic [23:0] lcd_pixel = 0;
  logic pix_wr_en, pix_full = 0, frame_done;
  logic [23:0] pix_wr_data;
  logic [15:0] crc_status;
  lcd_status_t status;
  int checks = 0, failures = 0;
  logic [23:0] exp_q[$];

  always #10ns clk = ~clk;
  lcd_rx dut (.*);

  function automatic logic [15:0] crc_ref(input logic [15:0] c, input logic [7:0] b);
    for (int i = 7; i >= 0; i--) begin
      logic fb; fb = c[15] ^ b[i];
      c = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  always @(posedge clk) if (pix_wr_en && !rst) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected pixel %h", pix_wr_data); end
    else begin
      automatic logic [23:0] e = exp_q.pop_front();
      if (pix_wr_data !== e) begin failures++; $display("FAIL: pixel %h exp %h", pix_wr_data, e); end
    end
  end

  // drive one frame; returns its CRC and pixel count
  task automatic vpu_frame(input int w, input int h, input int bpp, input bit expect_take,
                           output logic [15:0] crc, output int npix);
    crc = 0; npix = 0;
    @(negedge clk); lcd_vsync = 1;
    repeat (3) @(negedge clk);
    for (int l = 0; l < h; l++) begin
      lcd_hsync = 1;
      for (int p = 0; p < w; p++) begin
        automatic logic [23:0] px = 24'($urandom), m;
        while ($urandom % 4 == 0) begin lcd_valid = 0; lcd_pixel = 24'($urandom); @(negedge clk); end
        lcd_valid = 1; lcd_pixel = px;
        m = (bpp == 3) ? px : (bpp == 2) ? {8'h0, px[15:0]} : {16'h0, px[7:0]};
        for (int b = bpp - 1; b >= 0; b--) crc = crc_ref(crc, m[8*b +: 8]);
        npix++;
        if (expect_take) exp_q.push_back(m);
        @(negedge clk);
      end
      lcd_valid = 0; lcd_hsync = 0; lcd_pixel = 24'($urandom);
      // valid without hsync must be ignored
      lcd_valid = 1; @(negedge clk); lcd_valid = 0; @(negedge clk);
    end
    lcd_vsync = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    logic [15:0] c; int n;
    cfg = '0;
    repeat (3) @(negedge clk); rst = 0;
    // disabled: nothing taken, not counted
    vpu_frame(4, 2, 1, 0, c, n);
    checks++; if (status.frames_rx != 0) begin failures++; $display("FAIL: counted while disabled"); end
    cfg.enable = 1;
    for (int fmt = 1; fmt <= 3; fmt++) begin
      cfg.pix_fmt = 2'(fmt);
      vpu_frame(7 + fmt, 3 + fmt, fmt, 1, c, n);
      checks++;
      if (crc_status !== c || status.pixels_rx != n || status.frames_rx != fmt) begin
        failures++; $display("FAIL: fmt %0d crc %h/%h pixels %0d/%0d frames %0d", fmt, crc_status, c, status.pixels_rx, n, status.frames_rx); end
      checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d pixels missing", exp_q.size()); end
    end
    checks++; if (status.overflow) begin failures++; $display("FAIL: early overflow"); end
    // FIFO full during a frame: overflow set and sticky
    pix_full = 1;
    fork
      vpu_frame(5, 2, 3, 1, c, n);
      begin repeat (8) @(negedge clk); pix_full = 0; end
    join
    exp_q.delete();
    checks++; if (!status.overflow) begin failures++; $display("FAIL: overflow not flagged"); end
    vpu_frame(5, 2, 3, 1, c, n);
    checks++; if (!status.overflow || status.frames_rx != 5 || crc_status !== c) begin failures++; $display("FAIL: after overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
