// lcd_rx: LCD (parallel display interface) receiver from the VPU.
//
// The VPU drives LCD_pixel, LCD_hsync, LCD_vsync and LCD_valid together with
// the LCD pixel clock, which clocks this block. All four inputs are first
// registered. A pixel is taken when vsync, hsync and valid are all high,
// and written to the LCD pixel FIFO in the same clock (one pixel per clock at
// most). The VPU cannot be stalled: a pixel that meets a full FIFO is lost and
// sets the sticky `overflow` flag of the status.
//
// Every accepted pixel is folded into a CRC-16/XMODEM (bytes most significant
// first, 1/2/3 bytes by the configured format). When vsync falls the frame is
// complete: the frame counter increments, and the CRC and the number of pixels
// received are latched as status. The CRC restarts when vsync rises.
// Nothing is accepted while `enable` is low.
//
// The paper gives: one pixel per clock into the LCD pixel FIFO under the VPU's
// hsync/vsync, a CRC of the received direction, and a count of received frames
// as status. The input register stage, the use of LCD_valid as a qualifier and
// the status fields are this design's own.
module lcd_rx
  import cif_lcd_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  lcd_cfg_t          cfg,
  // LCD pins
  input  logic              lcd_valid,
  input  logic              lcd_hsync,
  input  logic              lcd_vsync,
  input  logic [PIX_W-1:0]  lcd_pixel,
  // LCD pixel FIFO write side
  output logic              pix_wr_en,
  output logic [PIX_W-1:0]  pix_wr_data,
  input  logic              pix_full,
  // status
  output logic [15:0]       crc_status,
  output lcd_status_t       status,
  output logic              frame_done      // one-clock pulse at the end of a frame
);
  logic             r_valid, r_hsync, r_vsync, vsync_d;
  logic [PIX_W-1:0] r_pixel;
  logic [31:0]      frames_rx, pixels_cur, pixels_last;
  logic             overflow;
  logic [15:0]      crc, crc_last;

  wire take     = cfg.enable && r_vsync && r_hsync && r_valid;
  wire v_rise   = r_vsync && !vsync_d;
  wire v_fall   = !r_vsync && vsync_d;
  wire [1:0] bpp = pix_bytes(cfg.pix_fmt);

  assign pix_wr_en   = take;
  assign pix_wr_data = (bpp == 2'd3) ? r_pixel :
                       (bpp == 2'd2) ? {8'h00, r_pixel[15:0]} : {16'h0000, r_pixel[7:0]};

  crc16_xmodem u_crc (
    .clk, .rst,
    .init     (v_rise),
    .en       (take),
    .nbytes   (bpp),
    .pixel    (pix_wr_data),
    .crc      (crc),
    .crc_next ()
  );

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      r_valid <= 1'b0; r_hsync <= 1'b0; r_vsync <= 1'b0; vsync_d <= 1'b0; r_pixel <= '0;
      frames_rx <= '0; pixels_cur <= '0; pixels_last <= '0; overflow <= 1'b0;
      crc_last <= '0; frame_done <= 1'b0;
    end else begin
      r_valid <= lcd_valid;
      r_hsync <= lcd_hsync;
      r_vsync <= lcd_vsync;
      r_pixel <= lcd_pixel;
      vsync_d <= r_vsync;
      frame_done <= 1'b0;
      if (take && pix_full) overflow <= 1'b1;
      if (v_rise) pixels_cur <= 32'(take);
      else if (take) pixels_cur <= pixels_cur + 1;
      if (v_fall && cfg.enable) begin
        frames_rx   <= frames_rx + 1;
        pixels_last <= pixels_cur;
        crc_last    <= crc;
        frame_done  <= 1'b1;
      end
    end
  end

  assign crc_status = crc_last;
  assign status     = '{frames_rx: frames_rx, pixels_rx: pixels_last, overflow: overflow};
endmodule
