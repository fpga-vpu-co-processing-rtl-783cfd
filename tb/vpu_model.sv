// vpu_model: behavioural model of the VPU's pins on the CIF/LCD link, for
// testbenches only (the VPU is a commercial processor; this models only what
// the FPGA sees of it).
//
// CIF receive: samples cif_hsync, cif_vsync and cif_pixel on the falling edge
// of the forwarded pixel clock (the FPGA launches on the rising edge). Each
// frame's image pixels are appended to `rx_pix`; the last line's extra pixels
// are taken as the CRC-16/XMODEM the FPGA appended, and compared with the CRC
// the model computes over the received pixels (`rx_crc_ok` / `rx_crc_bad`).
// The line width, pixel format and CRC setting it expects are set by the
// testbench in `cif_w`, `cif_fmt` and `cif_crc_en`. The clock counts at which
// vsync last rose and fell are kept, for frame-time checks.
//
// LCD transmit: the task send_frame drives a frame from `tx_pix` on the LCD
// pins, launched on the falling edge of lcd_pclk: vsync around the frame,
// hsync around each line, valid high for each pixel, with optional random
// one-clock gaps in valid (`valid_gaps`) and `tx_hblank` idle clocks between
// lines.
module vpu_model (
  input  logic        cif_pclk,
  input  logic        cif_hsync,
  input  logic        cif_vsync,
  input  logic [23:0] cif_pixel,
  input  logic        lcd_pclk,
  output logic        lcd_valid,
  output logic        lcd_hsync,
  output logic        lcd_vsync,
  output logic [23:0] lcd_pixel
);
  // CIF receive side
  int          cif_w = 1, cif_fmt = 1;
  bit          cif_crc_en = 1;
  logic [23:0] rx_pix[$];
  int          rx_frames = 0, rx_crc_ok = 0, rx_crc_bad = 0, rx_lines = 0;
  longint      rx_clk = 0, rx_vsync_rise_clk = 0, rx_vsync_fall_clk = 0;   // CIF clock count

  logic [23:0] line_buf[$];
  logic [15:0] crc = 0;
  bit          h_d = 0, v_d = 0;

  function automatic logic [15:0] crc_byte(input logic [15:0] c, input logic [7:0] b);
    for (int i = 7; i >= 0; i--) begin
      logic fb; fb = c[15] ^ b[i];
      c = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  always @(negedge cif_pclk) begin
    rx_clk++;
    if (cif_vsync && !v_d) begin crc = 0; rx_lines = 0; rx_vsync_rise_clk = rx_clk; end
    if (cif_hsync) line_buf.push_back(cif_pixel);
    if (!cif_hsync && h_d) begin
      rx_lines++;
      for (int i = 0; i < line_buf.size(); i++) begin
        if (i < cif_w) begin
          rx_pix.push_back(line_buf[i]);
          for (int b = cif_fmt - 1; b >= 0; b--) crc = crc_byte(crc, line_buf[i][8*b +: 8]);
        end
      end
      if (line_buf.size() > cif_w) begin   // the last line carries the CRC
        automatic logic [15:0] got = (cif_fmt == 1) ? {line_buf[cif_w][7:0], line_buf[cif_w+1][7:0]}
                                                    : line_buf[cif_w][15:0];
        if (got == crc) rx_crc_ok++; else begin rx_crc_bad++; $display("vpu_model: CRC %h, computed %h", got, crc); end
      end
      line_buf.delete();
    end
    if (!cif_vsync && v_d) begin rx_frames++; rx_vsync_fall_clk = rx_clk; end
    h_d = cif_hsync; v_d = cif_vsync;
  end

  // LCD transmit side
  logic [23:0] tx_pix[$];
  bit          valid_gaps = 0;
  int          tx_hblank = 2;
  int          tx_frames = 0;

  initial begin lcd_valid = 0; lcd_hsync = 0; lcd_vsync = 0; lcd_pixel = 0; end

  task automatic send_frame(input int w, input int h);
    @(negedge lcd_pclk); lcd_vsync = 1;
    repeat (2) @(negedge lcd_pclk);
    for (int l = 0; l < h; l++) begin
      lcd_hsync = 1;
      for (int p = 0; p < w; p++) begin
        while (valid_gaps && ($urandom % 8 == 0)) begin lcd_valid = 0; @(negedge lcd_pclk); end
        lcd_valid = 1; lcd_pixel = tx_pix.pop_front();
        @(negedge lcd_pclk);
      end
      lcd_valid = 0; lcd_hsync = 0; lcd_pixel = 0;
      repeat (tx_hblank) @(negedge lcd_pclk);
    end
    lcd_vsync = 0;
    repeat (2) @(negedge lcd_pclk);
    tx_frames++;
  endtask
endmodule
