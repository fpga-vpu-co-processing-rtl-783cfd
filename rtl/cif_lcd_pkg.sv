// cif_lcd_pkg: types and constants shared by the FPGA-side CIF transmitter and
// LCD receiver.
//
// The CIF and LCD links carry pixels of 8, 16 or 24 bits on a 24-bit pixel bus;
// the FPGA bus side carries 32-bit words. Frame dimensions and pixel width are
// run-time configuration; the blanking lengths and the enable bits are this
// design's own additions to what the paper lists. The status records hold
// frame counters and CRC-16/XMODEM results. Their total widths are chosen to
// match the widths printed on the status buses of the block diagram (96 bits
// CIF status, 16 bits LCD CRC, 65 bits LCD status); the split into fields is
// this design's own.
package cif_lcd_pkg;

  localparam int unsigned BUS_W = 32;  // FPGA bus word (native FIFO interface)
  localparam int unsigned PIX_W = 24;  // CIF/LCD pixel bus
  localparam int unsigned DIM_W = 16;  // width/height/blanking counters

  // Pixel bit-width selector. The code is the number of bytes per pixel.
  typedef enum logic [1:0] {
    PIX_8  = 2'd1,
    PIX_16 = 2'd2,
    PIX_24 = 2'd3
  } pix_fmt_e;

  // Bytes per pixel; an illegal code (0) is treated as 8-bit.
  function automatic logic [1:0] pix_bytes(input logic [1:0] fmt);
    return (fmt == 2'd0) ? 2'd1 : fmt;
  endfunction

  // CIF (FPGA -> VPU) configuration.
  typedef struct packed {
    logic             enable;   // transmit frames while set
    logic             crc_en;   // append CRC-16/XMODEM to the last line
    logic [1:0]       pix_fmt;  // pix_fmt_e code
    logic [DIM_W-1:0] width;    // pixels per line (1..)
    logic [DIM_W-1:0] height;   // lines per frame (1..)
    logic [DIM_W-1:0] hblank;   // idle clocks before each line
    logic [DIM_W-1:0] vblank;   // idle clocks after vsync rises and after it falls
  } cif_cfg_t;

  // LCD (VPU -> FPGA) configuration.
  typedef struct packed {
    logic             enable;   // accept frames while set
    logic [1:0]       pix_fmt;  // pix_fmt_e code
    logic [DIM_W-1:0] width;    // expected pixels per line
    logic [DIM_W-1:0] height;   // expected lines per frame
  } lcd_cfg_t;

  // CIF status, 96 bits.
  typedef struct packed {
    logic [31:0] frames_tx;     // frames fully transmitted
    logic [15:0] crc;           // CRC of the last transmitted frame
    logic [15:0] lines_tx;      // lines sent in the current/last frame
    logic [31:0] pixels_tx;     // pixels sent in the current/last frame (CRC pixels excluded)
  } cif_status_t;

  // LCD status, 65 bits.
  typedef struct packed {
    logic [31:0] frames_rx;     // frames received (vsync falling edges)
    logic [31:0] pixels_rx;     // pixels received in the last complete frame
    logic        overflow;      // sticky: a pixel arrived while the pixel FIFO was full
  } lcd_status_t;

  // CRC-16/XMODEM: poly 0x1021, init 0x0000, no reflection, no final xor.
  localparam logic [15:0] CRC_POLY = 16'h1021;
  localparam logic [15:0] CRC_INIT = 16'h0000;

  function automatic logic [15:0] crc16_byte(input logic [15:0] crc, input logic [7:0] data);
    logic [15:0] c;
    c = crc ^ {data, 8'h00};
    for (int i = 0; i < 8; i++)
      c = c[15] ? ((c << 1) ^ CRC_POLY) : (c << 1);
    return c;
  endfunction

endpackage
