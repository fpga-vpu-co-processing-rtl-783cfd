// tb_workloads: the I/O of the benchmark workloads run through the FPGA-side
// CIF/LCD interface at its default buffer sizes, with 50 MHz pixel clocks on
// both links (except the last test) and a 100 MHz system clock.
//
// Each workload is one frame in on CIF and one frame out on LCD, with the
// frame shapes of the evaluated benchmarks:
//   averaging binning     2048x2048 8-bit in, 1024x1024 8-bit out (2x2 mean)
//   FP convolution        1024x1024 8-bit in, 1024x1024 8-bit out (the kernel
//                         sizes differ only in VPU time; the image is returned
//                         unchanged here)
//   depth rendering       6x1 16-bit in (the pose vector), 1024x1024 16-bit out
//   CNN ship detection    1024x1024 16-bit in, 64x1 16-bit out (one value per
//                         128x128 patch)
//   CIF at full size      2048x2048 24-bit in (the largest frame the interface
//                         is sized for), returned as 64x1 24-bit
//   fast loopback         64x64 16-bit in and back unchanged, with the CIF
//                         clock raised to 100 MHz and the LCD clock to 90 MHz
// The behavioural VPU checks every CIF pixel and the appended CRC; the test
// checks every returned word, the frame counters and CRCs in the status
// registers, and the CIF frame time: one pixel per clock, so a 1 Mpixel frame
// takes about 21 ms and a 4 Mpixel frame about 84 ms at 50 MHz.
module tb_workloads;
  import cif_lcd_pkg::*;

  logic sys_clk = 0, cif_clk = 0, lcd_clk = 0, reset = 1;
  logic in_wr_en = 0, in_full, out_rd_en = 0, out_rd_valid, out_empty;
  logic [31:0] in_wr_data = 0, out_rd_data;
  logic reg_wr_en = 0;
  logic [2:0] reg_wr_addr = 0, sts_rd_addr = 0;
  logic [31:0] reg_wr_data = 0, sts_rd_data;
  cif_status_t cif_status;
  lcd_status_t lcd_status;
  logic [15:0] lcd_crc;
  logic cif_pclk_out, cif_hsync, cif_vsync, lcd_valid, lcd_hsync, lcd_vsync;
  logic [23:0] cif_pixel, lcd_pixel;
  int checks = 0, failures = 0;

  always #5ns  sys_clk = ~sys_clk;
  // pixel clocks: 50 MHz on both links, changed for the last test
  int      cif_mhz = 50;
  realtime cif_half = 10ns, lcd_half = 10ns;
  always #(cif_half) cif_clk = ~cif_clk;
  always #(lcd_half) lcd_clk = ~lcd_clk;

  cif_lcd_top dut (
    .sys_clk, .reset, .in_wr_en, .in_wr_data, .in_full, .out_rd_en, .out_rd_data, .out_rd_valid, .out_empty,
    .reg_wr_en, .reg_wr_addr, .reg_wr_data, .sts_rd_addr, .sts_rd_data, .cif_status, .lcd_status, .lcd_crc,
    .cif_pclk_in (cif_clk), .cif_pclk_out, .cif_hsync, .cif_vsync, .cif_pixel,
    .lcd_pclk_in (lcd_clk), .lcd_valid, .lcd_hsync, .lcd_vsync, .lcd_pixel);

  vpu_model u_vpu (
    .cif_pclk (cif_pclk_out), .cif_hsync, .cif_vsync, .cif_pixel,
    .lcd_pclk (lcd_clk), .lcd_valid, .lcd_hsync, .lcd_vsync, .lcd_pixel);

  int n_in_stall = 0, n_crc_ok = 0, n_loop_crc = 0;

  // ------------------------------------------------------------ system bus side
  logic [31:0] wq[$], rq[$];
  bit  reading = 1;

  always @(negedge sys_clk) begin
    in_wr_en = 0;
    if (!reset && wq.size() != 0) begin
      if (in_full) n_in_stall++;
      else begin in_wr_en = 1; in_wr_data = wq.pop_front(); end
    end
    out_rd_en = reading && !out_empty;
  end
  always @(posedge sys_clk) if (out_rd_valid) rq.push_back(out_rd_data);

  task automatic reg_wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge sys_clk); reg_wr_en = 1; reg_wr_addr = a; reg_wr_data = d;
    @(negedge sys_clk); reg_wr_en = 0;
  endtask

  task automatic sts_rd(input logic [2:0] a, output logic [31:0] d);
    @(negedge sys_clk); sts_rd_addr = a; #1ns d = sts_rd_data;
  endtask

  // pack pixels into bus words, least significant byte first, frame padded
  task automatic pack(input logic [23:0] px[$], input int bpp, output logic [31:0] words[$]);
    byte unsigned b[$];
    foreach (px[i]) for (int k = 0; k < bpp; k++) b.push_back(px[i][8*k +: 8]);
    while (b.size() % 4 != 0) b.push_back(0);
    words.delete();
    for (int i = 0; i < b.size(); i += 4) words.push_back({b[i+3], b[i+2], b[i+1], b[i]});
  endtask

  function automatic logic [23:0] rnd_px(input int bpp);
    logic [23:0] p = 24'($urandom);
    if (bpp < 3) p[23:16] = 0;
    if (bpp < 2) p[15:8] = 0;
    return p;
  endfunction

  task automatic wait_until(input string what, ref int v, input int target, input int limit_us);
    int t = 0;
    while (v < target && t < limit_us * 10) begin #100ns; t++; end
    if (v < target) begin failures++; $display("FAIL: timeout waiting for %s", what); end
  endtask

  task automatic wait_words(input int n, input int limit_us);
    int t = 0;
    while (rq.size() < n && t < limit_us * 10) begin #100ns; t++; end
    checks++;
    if (rq.size() != n) begin failures++; $display("FAIL: %0d result words, exp %0d", rq.size(), n); end
  endtask

  // one frame through CIF, then `out` back through LCD
  task automatic run_frame(input int w, input int h, input int bpp, input int ow, input int oh,
                           input int obpp, input logic [23:0] px[$], input int mode);
    logic [31:0] words[$], exp_words[$], d;
    logic [23:0] outpx[$];
    int f0 = u_vpu.rx_frames, c0 = u_vpu.rx_crc_ok, p0 = u_vpu.rx_pix.size();
    int lf0 = lcd_status.frames_rx;
    reg_wr(1, {16'(h), 16'(w)});                 // sizes first, then enable
    reg_wr(4, {16'(oh), 16'(ow)});
    reg_wr(0, 32'(1 | (1 << 1) | (bpp << 2)));
    reg_wr(3, 32'(1 | (obpp << 1)));
    u_vpu.cif_w = w; u_vpu.cif_fmt = bpp; u_vpu.cif_crc_en = 1;
    repeat (20) @(negedge sys_clk);             // configuration crosses the clock domains
    pack(px, bpp, words);
    foreach (words[i]) wq.push_back(words[i]);
    wait_until("CIF frame", u_vpu.rx_frames, f0 + 1, 200000);
    reg_wr(0, 32'((1 << 1) | (bpp << 2)));      // stop after one frame
    checks++;
    if (u_vpu.rx_pix.size() - p0 != w * h) begin failures++; $display("FAIL: VPU got %0d pixels", u_vpu.rx_pix.size() - p0); end
    for (int i = 0; i < w * h && p0 + i < u_vpu.rx_pix.size(); i++) begin
      checks++; if (u_vpu.rx_pix[p0 + i] !== px[i]) begin failures++; $display("FAIL: CIF pixel %0d %h exp %h", i, u_vpu.rx_pix[p0+i], px[i]); end
    end
    checks++; if (u_vpu.rx_crc_ok != c0 + 1) begin failures++; $display("FAIL: CIF CRC not confirmed by the VPU"); end
    else n_crc_ok++;
    // result frame computed here
    if (mode == 0) outpx = px;
    else begin                                   // 2x2 averaging binning, stride 2
      for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
        int s = int'(px[(2*y)*w + 2*x]) + int'(px[(2*y)*w + 2*x + 1]) + int'(px[(2*y+1)*w + 2*x]) + int'(px[(2*y+1)*w + 2*x + 1]);
        outpx.push_back(24'(s / 4));
      end
    end
    if (mode == 2) begin                         // any result image, made here
      outpx.delete();
      for (int i = 0; i < ow * oh; i++) outpx.push_back(rnd_px(obpp));
    end
    begin                                        // CIF frame time, one pixel per clock
      longint t = u_vpu.rx_vsync_fall_clk - u_vpu.rx_vsync_rise_clk;    // CIF clocks
      longint tmin = longint'(w) * h + (bpp == 1 ? 2 : 1);
      longint tmax = tmin + longint'(h) * 8 + 50;
      $display("  CIF frame %0dx%0d %0d-bit: %0d clocks = %0d us at %0d MHz", w, h, 8 * bpp, t, t / cif_mhz, cif_mhz);
      checks++;
      if (t < tmin || t > tmax) begin failures++; $display("FAIL: CIF frame time %0d clocks", t); end
    end
    foreach (outpx[i]) u_vpu.tx_pix.push_back(outpx[i]);
    rq.delete();
    u_vpu.valid_gaps = 0;
    u_vpu.send_frame(ow, oh);
    pack(outpx, obpp, exp_words);
    wait_words(exp_words.size(), 200000);
    for (int i = 0; i < exp_words.size() && i < rq.size(); i++) begin
      checks++; if (rq[i] !== exp_words[i]) begin failures++; $display("FAIL: LCD word %0d %h exp %h", i, rq[i], exp_words[i]); end
    end
    repeat (40) @(negedge sys_clk);              // status crosses back
    checks++; if (lcd_status.frames_rx != lf0 + 1) begin failures++; $display("FAIL: LCD frame count"); end
    sts_rd(1, d);
    if (mode == 0) begin
      logic [31:0] l;
      sts_rd(5, l);
      checks++;
      if (d[15:0] !== l[15:0]) begin failures++; $display("FAIL: loopback CRC %h vs %h", d[15:0], l[15:0]); end
      else n_loop_crc++;
    end
    reg_wr(3, 32'(obpp << 1));                   // LCD disabled between frames
  endtask

  initial begin
    logic [23:0] px[$];
    logic [31:0] d;
    #100ns reset = 0;
    repeat (5) @(negedge sys_clk);               // synchronised resets release
    u_vpu.rx_frames = 0; u_vpu.rx_crc_ok = 0; u_vpu.rx_crc_bad = 0; u_vpu.rx_pix.delete();
    reg_wr(2, {16'd2, 16'd2});                   // vblank 2, hblank 2
    $display("averaging binning");
    px.delete(); for (int i = 0; i < 2048 * 2048; i++) px.push_back(rnd_px(1));
    run_frame(2048, 2048, 1, 1024, 1024, 1, px, 1);
    u_vpu.rx_pix.delete();
    $display("FP convolution");
    px.delete(); for (int i = 0; i < 1024 * 1024; i++) px.push_back(rnd_px(1));
    run_frame(1024, 1024, 1, 1024, 1024, 1, px, 0);
    u_vpu.rx_pix.delete();
    $display("depth rendering");
    px.delete(); for (int i = 0; i < 6; i++) px.push_back(rnd_px(2));
    run_frame(6, 1, 2, 1024, 1024, 2, px, 2);
    u_vpu.rx_pix.delete();
    $display("CNN ship detection");
    px.delete(); for (int i = 0; i < 1024 * 1024; i++) px.push_back(rnd_px(2));
    run_frame(1024, 1024, 2, 64, 1, 2, px, 2);
    u_vpu.rx_pix.delete();
    $display("4 Mpixel 24-bit frame");
    px.delete(); for (int i = 0; i < 2048 * 2048; i++) px.push_back(rnd_px(3));
    run_frame(2048, 2048, 3, 64, 1, 3, px, 2);
    u_vpu.rx_pix.delete();
    $display("loopback 64x64 16-bit, CIF at 100 MHz, LCD at 90 MHz");
    cif_half = 5ns; lcd_half = 5.556ns; cif_mhz = 100;
    repeat (20) @(negedge sys_clk);
    px.delete(); for (int i = 0; i < 64 * 64; i++) px.push_back(rnd_px(2));
    run_frame(64, 64, 2, 64, 64, 2, px, 0);
    sts_rd(0, d);
    checks++; if (d != 32'd6 || u_vpu.rx_frames != 6) begin failures++; $display("FAIL: CIF frames %0d/%0d", d, u_vpu.rx_frames); end
    sts_rd(3, d);
    checks++; if (d != 32'd6) begin failures++; $display("FAIL: LCD frames %0d", d); end
    checks++; if (u_vpu.rx_crc_bad != 0) begin failures++; $display("FAIL: CRC errors at the VPU"); end
    $display("CIF CRCs confirmed by the VPU: %0d, loopback CRC matches: %0d, input stalls: %0d", n_crc_ok, n_loop_crc, n_in_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2s; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
