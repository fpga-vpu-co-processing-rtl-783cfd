// tb_cif_lcd_top: end-to-end test of the FPGA-side CIF/LCD interface with a
// behavioural VPU on the other side of the link.
//
// The testbench plays the system bus: it writes the control registers, pushes
// frames as 32-bit words into the input FIFO port, pops result words from the
// output FIFO port and reads the status registers. The VPU model receives each
// CIF frame, checks the appended CRC, and sends a result frame back on LCD.
// Three clocks run unrelated: system 10 ns, CIF 20 ns, LCD 22 ns. Buffers are
// made small so that every mechanism occurs in a short run.
//
// Scenarios and what is checked against values computed here:
//   loopback in 8, 16 and 24-bit pixels: CIF pixels equal the frame sent,
//     LCD words equal the frame packed again, and the CIF CRC status equals the
//     LCD CRC status (the loopback check of the link);
//   averaging binning (2x2 mean, stride 2) on an 8-bit frame: the returned
//     words equal the binned image;
//   pipelined I/O: a 16-bit CIF frame goes out while a 16-bit result frame
//     comes back on LCD at the same time, and both arrive intact;
//   back-pressure on the input port (in_full) and from a full CIF pixel FIFO
//   (a long vblank lets it fill), the CIF transmitter waiting for
//     a whole line when the writer is slow, LCD pixel FIFO overflow when the
//     output port is not read, and the forwarded CIF pixel clock.
// Each mechanism is counted and a mechanism that never happens is a failure.
module tb_cif_lcd_top;
  import cif_lcd_pkg::*;
  localparam int IMG_D = 16, PIX_D = 64;

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
  always #10ns cif_clk = ~cif_clk;
  always #11ns lcd_clk = ~lcd_clk;

  cif_lcd_top #(.IMG_BUF_DEPTH(IMG_D), .PIX_FIFO_DEPTH(PIX_D)) dut (
    .sys_clk, .reset, .in_wr_en, .in_wr_data, .in_full, .out_rd_en, .out_rd_data, .out_rd_valid, .out_empty,
    .reg_wr_en, .reg_wr_addr, .reg_wr_data, .sts_rd_addr, .sts_rd_data, .cif_status, .lcd_status, .lcd_crc,
    .cif_pclk_in (cif_clk), .cif_pclk_out, .cif_hsync, .cif_vsync, .cif_pixel,
    .lcd_pclk_in (lcd_clk), .lcd_valid, .lcd_hsync, .lcd_vsync, .lcd_pixel);

  vpu_model u_vpu (
    .cif_pclk (cif_pclk_out), .cif_hsync, .cif_vsync, .cif_pixel,
    .lcd_pclk (lcd_clk), .lcd_valid, .lcd_hsync, .lcd_vsync, .lcd_pixel);

  // ------------------------------------------------------------ mechanism counters
  int n_in_stall = 0, n_line_wait = 0, n_overflow = 0, n_crc_ok = 0, n_loop_crc = 0;
  int n_fmt[4] = '{0, 0, 0, 0};
  int n_binning = 0, n_pclk_out = 0, n_pix_full = 0, n_overlap = 0, n_pipelined = 0;

  always @(posedge cif_pclk_out) n_pclk_out++;
  always @(posedge cif_clk) if (!reset && dut.cpix_full) n_pix_full++;
  // clocks on which a CIF frame and an LCD frame are both on the pins
  always @(posedge sys_clk) if (!reset && cif_vsync && lcd_vsync) n_overlap++;

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

  always @(posedge cif_clk)
    if (!reset && cif_vsync && !cif_hsync && dut.cpix_count != 0 &&
        32'(dut.cpix_count) < 32'(u_vpu.cif_w) && dut.u_cif_tx.cnt == 0) n_line_wait++;

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
    wait_until("CIF frame", u_vpu.rx_frames, f0 + 1, 2000);
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
    foreach (outpx[i]) u_vpu.tx_pix.push_back(outpx[i]);
    rq.delete();
    u_vpu.valid_gaps = 1;
    u_vpu.send_frame(ow, oh);
    pack(outpx, obpp, exp_words);
    wait_words(exp_words.size(), 1000);
    for (int i = 0; i < exp_words.size() && i < rq.size(); i++) begin
      checks++; if (rq[i] !== exp_words[i]) begin failures++; $display("FAIL: LCD word %0d %h exp %h", i, rq[i], exp_words[i]); end
    end
    if (mode == 1 && rq.size() == exp_words.size()) n_binning++;
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
    n_fmt[bpp]++;
    reg_wr(3, 32'(obpp << 1));                   // LCD disabled between frames
  endtask

  initial begin
    logic [23:0] px[$];
    logic [31:0] d;
    #100ns reset = 0;
    repeat (5) @(negedge sys_clk);               // synchronised resets release
    // forget what the VPU model saw of the pins before reset took hold
    u_vpu.rx_frames = 0; u_vpu.rx_crc_ok = 0; u_vpu.rx_crc_bad = 0; u_vpu.rx_pix.delete();
    reg_wr(2, {16'd100, 16'd2});                 // vblank 100 (the pixel FIFO fills), hblank 2
    // loopback in the three formats
    for (int bpp = 1; bpp <= 3; bpp++) begin
      automatic int w = 29 + bpp, h = 4 + bpp;
      px.delete();
      for (int i = 0; i < w * h; i++) px.push_back(rnd_px(bpp));
      run_frame(w, h, bpp, w, h, bpp, px, 0);
    end
    // averaging binning: 32x16 8-bit in, 16x8 8-bit out
    px.delete();
    for (int i = 0; i < 32 * 16; i++) px.push_back(rnd_px(1));
    run_frame(32, 16, 1, 16, 8, 1, px, 1);
    // pipelined I/O: the next input frame goes out on CIF while the VPU returns
    // the previous result on LCD
    begin
      logic [23:0] pb[$];
      logic [31:0] words[$], exp_words[$];
      automatic int f0 = u_vpu.rx_frames, p0 = u_vpu.rx_pix.size();
      px.delete();
      for (int i = 0; i < 40 * 6; i++) px.push_back(rnd_px(2));
      for (int i = 0; i < 36 * 5; i++) pb.push_back(rnd_px(2));
      reg_wr(1, {16'd6, 16'd40}); reg_wr(4, {16'd5, 16'd36});
      reg_wr(0, 32'(1 | (1 << 1) | (2 << 2))); reg_wr(3, 32'(1 | (2 << 1)));
      u_vpu.cif_w = 40; u_vpu.cif_fmt = 2; u_vpu.cif_crc_en = 1;
      repeat (20) @(negedge sys_clk);
      pack(px, 2, words);
      pack(pb, 2, exp_words);
      foreach (pb[i]) u_vpu.tx_pix.push_back(pb[i]);
      rq.delete();
      u_vpu.valid_gaps = 0;
      foreach (words[i]) wq.push_back(words[i]);
      fork
        u_vpu.send_frame(36, 5);
        wait_until("pipelined CIF frame", u_vpu.rx_frames, f0 + 1, 2000);
      join
      reg_wr(0, 32'((1 << 1) | (2 << 2)));
      wait_words(exp_words.size(), 1000);
      checks++;
      if (u_vpu.rx_pix.size() - p0 != 40 * 6) begin failures++; $display("FAIL: pipelined CIF got %0d pixels", u_vpu.rx_pix.size() - p0); end
      for (int i = 0; i < 40 * 6 && p0 + i < u_vpu.rx_pix.size(); i++) begin
        checks++; if (u_vpu.rx_pix[p0 + i] !== px[i]) begin failures++; $display("FAIL: pipelined CIF pixel %0d", i); end
      end
      for (int i = 0; i < exp_words.size() && i < rq.size(); i++) begin
        checks++; if (rq[i] !== exp_words[i]) begin failures++; $display("FAIL: pipelined LCD word %0d %h exp %h", i, rq[i], exp_words[i]); end
      end
      if (n_overlap > 0 && rq.size() == exp_words.size()) n_pipelined++;
      reg_wr(3, 32'(2 << 1));
    end
    // slow writer: the transmitter must wait for whole lines
    begin
      logic [31:0] words[$];
      automatic int f0 = u_vpu.rx_frames;
      px.delete();
      for (int i = 0; i < 48 * 4; i++) px.push_back(rnd_px(3));
      reg_wr(1, {16'd4, 16'd48}); reg_wr(0, 32'(1 | (1 << 1) | (3 << 2)));
      u_vpu.cif_w = 48; u_vpu.cif_fmt = 3;
      repeat (20) @(negedge sys_clk);
      pack(px, 3, words);
      foreach (words[i]) begin wq.push_back(words[i]); repeat (12) @(negedge sys_clk); end
      wait_until("slow CIF frame", u_vpu.rx_frames, f0 + 1, 2000);
      reg_wr(0, 32'(3 << 2));
      checks++; if (u_vpu.rx_crc_bad != 0) begin failures++; $display("FAIL: CRC errors at the VPU"); end
    end
    // LCD overflow: output port not read, frame larger than both LCD buffers
    reading = 0;
    reg_wr(4, {16'd8, 16'd64}); reg_wr(3, 32'(1 | (1 << 1)));
    repeat (20) @(negedge sys_clk);
    for (int i = 0; i < 512; i++) u_vpu.tx_pix.push_back(rnd_px(1));
    u_vpu.valid_gaps = 0;
    u_vpu.send_frame(64, 8);
    repeat (40) @(negedge sys_clk);
    sts_rd(5, d);
    checks++; if (!d[16]) begin failures++; $display("FAIL: overflow not reported"); end
    else n_overflow++;
    reading = 1;
    repeat (200) @(negedge sys_clk);
    // frame counters through the status port
    sts_rd(0, d);
    checks++; if (d != 32'(u_vpu.rx_frames)) begin failures++; $display("FAIL: CIF frames %0d vs %0d", d, u_vpu.rx_frames); end
    sts_rd(3, d);
    checks++; if (d != 32'(u_vpu.tx_frames)) begin failures++; $display("FAIL: LCD frames %0d vs %0d", d, u_vpu.tx_frames); end

    $display("mechanisms: in_full stalls=%0d line waits=%0d lcd overflow=%0d cif crc ok=%0d loopback crc=%0d",
             n_in_stall, n_line_wait, n_overflow, n_crc_ok, n_loop_crc);
    $display("            8/16/24-bit frames=%0d/%0d/%0d binning=%0d forwarded clock edges=%0d cif pixel FIFO full=%0d",
             n_fmt[1], n_fmt[2], n_fmt[3], n_binning, n_pclk_out, n_pix_full);
    $display("            overlapping CIF/LCD clocks=%0d pipelined frame pairs=%0d", n_overlap, n_pipelined);
    if (n_in_stall == 0)  begin failures++; $display("FAIL: no input back-pressure"); end
    if (n_line_wait == 0) begin failures++; $display("FAIL: no whole-line wait"); end
    if (n_overflow == 0)  begin failures++; $display("FAIL: no LCD overflow"); end
    if (n_crc_ok == 0)    begin failures++; $display("FAIL: no CIF CRC"); end
    if (n_loop_crc == 0)  begin failures++; $display("FAIL: no loopback CRC match"); end
    if (n_fmt[1] == 0 || n_fmt[2] == 0 || n_fmt[3] == 0) begin failures++; $display("FAIL: a pixel format unused"); end
    if (n_binning == 0)   begin failures++; $display("FAIL: no binning frame"); end
    if (n_pclk_out == 0)  begin failures++; $display("FAIL: no forwarded clock"); end
    if (n_pix_full == 0)  begin failures++; $display("FAIL: CIF pixel FIFO never full"); end
    if (n_pipelined == 0) begin failures++; $display("FAIL: CIF and LCD frames never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
