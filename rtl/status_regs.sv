// status_regs: status registers of the CIF and LCD interfaces, brought from the
// pixel-clock domains into the system clock domain and readable as 32-bit words.
//
// The CIF status (frames sent, CRC of the last frame, lines and pixels of the
// current frame) and the LCD status (frames received, pixels of the last frame,
// overflow flag) together with the LCD frame CRC are each carried across with a
// handshake synchroniser, so a read never mixes two updates. They follow the
// pixel-side values within a few clocks. Read port (system clock,
// combinational): word address to 32-bit data.
//   0 CIF frames sent            1 [15:0] CIF CRC of last frame, [31:16] lines
//   2 CIF pixels of frame        3 LCD frames received
//   4 LCD pixels of last frame   5 [15:0] LCD CRC of last frame, [16] LCD overflow
// The full records are also given as outputs.
//
// The paper lists CRC results of both directions and the frame counts as
// status; the other fields and the map are this design's own.
module status_regs
  import cif_lcd_pkg::*;
(
  input  logic        sys_clk,
  input  logic        sys_rst,
  input  logic [2:0]  rd_addr,
  output logic [31:0] rd_data,
  output cif_status_t cif_status_sys,
  output lcd_status_t lcd_status_sys,
  output logic [15:0] lcd_crc_sys,

  input  logic        cif_clk,
  input  logic        cif_rst,
  input  cif_status_t cif_status,
  input  logic        lcd_clk,
  input  logic        lcd_rst,
  input  logic [15:0] lcd_crc,
  input  lcd_status_t lcd_status
);
  cdc_handshake #(.WIDTH($bits(cif_status_t))) u_cdc_cif (
    .src_clk (cif_clk), .src_rst (cif_rst), .src_data (cif_status),
    .dst_clk (sys_clk), .dst_rst (sys_rst), .dst_data (cif_status_sys), .dst_update ()
  );

  cdc_handshake #(.WIDTH(16 + $bits(lcd_status_t))) u_cdc_lcd (
    .src_clk (lcd_clk), .src_rst (lcd_rst), .src_data ({lcd_crc, lcd_status}),
    .dst_clk (sys_clk), .dst_rst (sys_rst), .dst_data ({lcd_crc_sys, lcd_status_sys}), .dst_update ()
  );

  always_comb begin
    unique case (rd_addr)
      3'd0:    rd_data = cif_status_sys.frames_tx;
      3'd1:    rd_data = {cif_status_sys.lines_tx, cif_status_sys.crc};
      3'd2:    rd_data = cif_status_sys.pixels_tx;
      3'd3:    rd_data = lcd_status_sys.frames_rx;
      3'd4:    rd_data = lcd_status_sys.pixels_rx;
      3'd5:    rd_data = {15'd0, lcd_status_sys.overflow, lcd_crc_sys};
      default: rd_data = '0;
    endcase
  end
endmodule
