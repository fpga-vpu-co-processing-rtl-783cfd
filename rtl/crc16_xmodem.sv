// crc16_xmodem: CRC-16/XMODEM accumulator that consumes one pixel per clock.
//
// CRC-16/XMODEM is the polynomial x^16+x^12+x^5+1 (0x1021), initial value
// 0x0000, no bit reflection and no final xor. A pixel of 1, 2 or 3 bytes
// (pixel bits [7:0], [15:0] or [23:0]) is folded in most significant byte
// first in one clock; `init` restarts the CRC at the start of a frame. `crc`
// is the register; `crc_next` is the value it takes on this clock's update, so
// a caller can use the frame's final CRC in the same clock as its last pixel.
//
// The paper names the CRC and its variant; the byte order within a pixel and
// the one-pixel-per-clock structure are this design's own.
module crc16_xmodem
  import cif_lcd_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              init,      // restart at CRC_INIT (applied before `en`)
  input  logic              en,        // fold `pixel` in this clock
  input  logic [1:0]        nbytes,    // 1, 2 or 3 bytes per pixel
  input  logic [PIX_W-1:0]  pixel,
  output logic [15:0]       crc,
  output logic [15:0]       crc_next
);
  always_comb begin
    logic [15:0] c;
    c = init ? CRC_INIT : crc;
    if (en) begin
      if (nbytes == 2'd3) c = crc16_byte(c, pixel[23:16]);
      if (nbytes >= 2'd2) c = crc16_byte(c, pixel[15:8]);
      c = crc16_byte(c, pixel[7:0]);
    end
    crc_next = c;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) crc <= CRC_INIT;
    else     crc <= crc_next;
  end
endmodule
