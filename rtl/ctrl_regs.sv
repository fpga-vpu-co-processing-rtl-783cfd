// ctrl_regs: control registers of the CIF and LCD interfaces, written at run
// time from the system side, with clock-domain crossing into the CIF and LCD
// pixel-clock domains.
//
// Register write port (system clock): `wr_en` with a word address and 32-bit
// data. Word map:
//   0 CIF_CTRL   [0] enable  [1] crc_en  [3:2] pixel format (1: 8, 2: 16, 3: 24 bit)
//   1 CIF_SIZE   [15:0] width (pixels per line)   [31:16] height (lines)
//   2 CIF_BLANK  [15:0] hblank (clocks)            [31:16] vblank (clocks)
//   3 LCD_CTRL   [0] enable  [2:1] pixel format
//   4 LCD_SIZE   [15:0] width                      [31:16] height
// Other addresses are ignored. The registers reset to zero (both directions
// disabled). The whole CIF record and the whole LCD record are each carried
// across with a handshake synchroniser, so a pixel domain never sees half of
// an update; a new value reaches the pixel domain a few clocks later, and the
// pixel-side blocks apply it at their next frame start.
//
// The paper states that these registers set the frame dimensions and the pixel
// bit-width at run time and cross clock domains; the register map, the enable,
// CRC-enable and blanking fields are this design's own.
module ctrl_regs
  import cif_lcd_pkg::*;
(
  input  logic        sys_clk,
  input  logic        sys_rst,
  input  logic        wr_en,
  input  logic [2:0]  wr_addr,
  input  logic [31:0] wr_data,

  input  logic        cif_clk,
  input  logic        cif_rst,
  output cif_cfg_t    cif_cfg,
  input  logic        lcd_clk,
  input  logic        lcd_rst,
  output lcd_cfg_t    lcd_cfg
);
  cif_cfg_t cif_cfg_sys;   // system-domain registers
  lcd_cfg_t lcd_cfg_sys;

  always_ff @(posedge sys_clk or posedge sys_rst) begin
    if (sys_rst) begin
      cif_cfg_sys <= '0;
      lcd_cfg_sys <= '0;
    end else if (wr_en) begin
      unique case (wr_addr)
        3'd0: begin
          cif_cfg_sys.enable  <= wr_data[0];
          cif_cfg_sys.crc_en  <= wr_data[1];
          cif_cfg_sys.pix_fmt <= wr_data[3:2];
        end
        3'd1: begin cif_cfg_sys.width  <= wr_data[15:0]; cif_cfg_sys.height <= wr_data[31:16]; end
        3'd2: begin cif_cfg_sys.hblank <= wr_data[15:0]; cif_cfg_sys.vblank <= wr_data[31:16]; end
        3'd3: begin
          lcd_cfg_sys.enable  <= wr_data[0];
          lcd_cfg_sys.pix_fmt <= wr_data[2:1];
        end
        3'd4: begin lcd_cfg_sys.width  <= wr_data[15:0]; lcd_cfg_sys.height <= wr_data[31:16]; end
        default: ;
      endcase
    end
  end

  cdc_handshake #(.WIDTH($bits(cif_cfg_t))) u_cdc_cif (
    .src_clk (sys_clk), .src_rst (sys_rst), .src_data (cif_cfg_sys),
    .dst_clk (cif_clk), .dst_rst (cif_rst), .dst_data (cif_cfg), .dst_update ()
  );

  cdc_handshake #(.WIDTH($bits(lcd_cfg_t))) u_cdc_lcd (
    .src_clk (sys_clk), .src_rst (sys_rst), .src_data (lcd_cfg_sys),
    .dst_clk (lcd_clk), .dst_rst (lcd_rst), .dst_data (lcd_cfg), .dst_update ()
  );
endmodule
