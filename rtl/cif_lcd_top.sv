// cif_lcd_top: FPGA side of an FPGA + VPU co-processor link. Image frames
// written by the system as 32-bit words leave the FPGA on a CIF (parallel
// camera) port towards the VPU; result frames come back from the VPU on its
// LCD (parallel display) port and are read by the system as 32-bit words.
//
// Transmit path (system clock -> CIF pixel clock):
//   in_* native FIFO write port -> CIF cross-clock buffer (async_fifo, 32 bit)
//   -> cif_fsm (words to 8/16/24-bit pixels) -> CIF pixel FIFO (sync_fifo,
//   24 bit) -> cif_tx (hsync/vsync/pixel, CRC-16/XMODEM appended to the last
//   line) -> CIF pins. The CIF pixel clock comes in on cif_pclk_in and is sent
//   back out to the VPU on cif_pclk_out through an ODDR.
// Receive path (LCD pixel clock -> system clock):
//   LCD pins -> lcd_rx (one pixel per clock, CRC, frame count) -> LCD pixel
//   FIFO (sync_fifo, 24 bit) -> lcd_fsm (pixels to 32-bit words) -> LCD
//   cross-clock buffer (async_fifo, 32 bit) -> out_* native FIFO read port.
// Control: ctrl_regs (system-clock register writes, handed to both pixel
// domains); status_regs (CIF and LCD status and CRCs, brought back to the
// system clock, readable by word address).
//
// Three clocks: sys_clk, cif_pclk_in and lcd_pclk_in, with no required
// relation between them. One asynchronous reset, synchronised into each
// domain. Throughput: one pixel per pixel clock on each link, so a 1024x1024
// frame takes about 21 ms at 50 MHz plus blanking.
//
// The structure follows the paper's block diagram of the FPGA interface; buffer
// depths, register map, sync timing and CRC placement details are this
// design's own (see each block).
module cif_lcd_top
  import cif_lcd_pkg::*;
#(
  parameter int unsigned IMG_BUF_DEPTH = 1024,  // 32-bit words in each cross-clock buffer
  parameter int unsigned PIX_FIFO_DEPTH = 2048  // pixels in each pixel FIFO (>= longest CIF line)
) (
  input  logic               sys_clk,
  input  logic               reset,
  // native FIFO write port: frames to the VPU
  input  logic               in_wr_en,
  input  logic [BUS_W-1:0]   in_wr_data,
  output logic               in_full,
  // native FIFO read port: frames from the VPU
  input  logic               out_rd_en,
  output logic [BUS_W-1:0]   out_rd_data,
  output logic               out_rd_valid,
  output logic               out_empty,
  // control register write port
  input  logic               reg_wr_en,
  input  logic [2:0]         reg_wr_addr,
  input  logic [31:0]        reg_wr_data,
  // status register read port
  input  logic [2:0]         sts_rd_addr,
  output logic [31:0]        sts_rd_data,
  output cif_status_t        cif_status,
  output lcd_status_t        lcd_status,
  output logic [15:0]        lcd_crc,
  // CIF pins (to the VPU)
  input  logic               cif_pclk_in,
  output logic               cif_pclk_out,
  output logic               cif_hsync,
  output logic               cif_vsync,
  output logic [PIX_W-1:0]   cif_pixel,
  // LCD pins (from the VPU)
  input  logic               lcd_pclk_in,
  input  logic               lcd_valid,
  input  logic               lcd_hsync,
  input  logic               lcd_vsync,
  input  logic [PIX_W-1:0]   lcd_pixel
);
  localparam int unsigned PCW = $clog2(PIX_FIFO_DEPTH) + 1;

  logic sys_rst, cif_rst, lcd_rst;
  rst_sync u_rst_sys (.clk (sys_clk),     .rst_in (reset), .rst_out (sys_rst));
  rst_sync u_rst_cif (.clk (cif_pclk_in), .rst_in (reset), .rst_out (cif_rst));
  rst_sync u_rst_lcd (.clk (lcd_pclk_in), .rst_in (reset), .rst_out (lcd_rst));

  // ---------------------------------------------------------------- control
  cif_cfg_t cif_cfg;
  lcd_cfg_t lcd_cfg;

  ctrl_regs u_ctrl (
    .sys_clk, .sys_rst,
    .wr_en (reg_wr_en), .wr_addr (reg_wr_addr), .wr_data (reg_wr_data),
    .cif_clk (cif_pclk_in), .cif_rst, .cif_cfg,
    .lcd_clk (lcd_pclk_in), .lcd_rst, .lcd_cfg
  );

  // ---------------------------------------------------------------- CIF path
  logic             cbuf_rd_en, cbuf_rd_valid, cbuf_empty;
  logic [BUS_W-1:0] cbuf_rd_data;
  logic             cpix_wr_en, cpix_full, cpix_rd_en, cpix_rd_valid;
  logic [PIX_W-1:0] cpix_wr_data, cpix_rd_data;
  logic [PCW-1:0]   cpix_count;
  cif_status_t      cif_status_px;

  async_fifo #(.WIDTH (BUS_W), .DEPTH (IMG_BUF_DEPTH)) u_cif_buf (
    .wr_clk (sys_clk),     .wr_rst (sys_rst), .wr_en (in_wr_en), .wr_data (in_wr_data), .full (in_full),
    .rd_clk (cif_pclk_in), .rd_rst (cif_rst), .rd_en (cbuf_rd_en), .rd_data (cbuf_rd_data),
    .rd_valid (cbuf_rd_valid), .empty (cbuf_empty)
  );

  cif_fsm u_cif_fsm (
    .clk (cif_pclk_in), .rst (cif_rst), .cfg (cif_cfg),
    .buf_rd_en (cbuf_rd_en), .buf_rd_data (cbuf_rd_data), .buf_rd_valid (cbuf_rd_valid), .buf_empty (cbuf_empty),
    .pix_wr_en (cpix_wr_en), .pix_wr_data (cpix_wr_data), .pix_full (cpix_full),
    .frame_active ()
  );

  sync_fifo #(.WIDTH (PIX_W), .DEPTH (PIX_FIFO_DEPTH)) u_cif_pix (
    .clk (cif_pclk_in), .rst (cif_rst), .clear (1'b0),
    .wr_en (cpix_wr_en), .wr_data (cpix_wr_data), .full (cpix_full), .overflow (),
    .rd_en (cpix_rd_en), .rd_data (cpix_rd_data), .rd_valid (cpix_rd_valid), .empty (), .count (cpix_count)
  );

  cif_tx #(.FIFO_DEPTH (PIX_FIFO_DEPTH)) u_cif_tx (
    .clk (cif_pclk_in), .rst (cif_rst), .cfg (cif_cfg),
    .pix_rd_en (cpix_rd_en), .pix_rd_data (cpix_rd_data), .pix_rd_valid (cpix_rd_valid), .pix_count (cpix_count),
    .cif_hsync, .cif_vsync, .cif_pixel,
    .status (cif_status_px), .frame_done ()
  );

  oddr u_pclk_oddr (
    .C (cif_pclk_in), .CE (1'b1), .D1 (1'b1), .D2 (1'b0), .R (1'b0), .S (1'b0), .Q (cif_pclk_out)
  );

  // ---------------------------------------------------------------- LCD path
  logic             lpix_wr_en, lpix_full, lpix_rd_en, lpix_rd_valid, lpix_empty;
  logic [PIX_W-1:0] lpix_wr_data, lpix_rd_data;
  logic             lbuf_wr_en, lbuf_full;
  logic [BUS_W-1:0] lbuf_wr_data;
  lcd_status_t      lcd_status_px;
  logic [15:0]      lcd_crc_px;

  lcd_rx u_lcd_rx (
    .clk (lcd_pclk_in), .rst (lcd_rst), .cfg (lcd_cfg),
    .lcd_valid, .lcd_hsync, .lcd_vsync, .lcd_pixel,
    .pix_wr_en (lpix_wr_en), .pix_wr_data (lpix_wr_data), .pix_full (lpix_full),
    .crc_status (lcd_crc_px), .status (lcd_status_px), .frame_done ()
  );

  sync_fifo #(.WIDTH (PIX_W), .DEPTH (PIX_FIFO_DEPTH)) u_lcd_pix (
    .clk (lcd_pclk_in), .rst (lcd_rst), .clear (1'b0),
    .wr_en (lpix_wr_en), .wr_data (lpix_wr_data), .full (lpix_full), .overflow (),
    .rd_en (lpix_rd_en), .rd_data (lpix_rd_data), .rd_valid (lpix_rd_valid), .empty (lpix_empty), .count ()
  );

  lcd_fsm u_lcd_fsm (
    .clk (lcd_pclk_in), .rst (lcd_rst), .cfg (lcd_cfg),
    .pix_rd_en (lpix_rd_en), .pix_rd_data (lpix_rd_data), .pix_rd_valid (lpix_rd_valid), .pix_empty (lpix_empty),
    .buf_wr_en (lbuf_wr_en), .buf_wr_data (lbuf_wr_data), .buf_full (lbuf_full),
    .frame_active ()
  );

  async_fifo #(.WIDTH (BUS_W), .DEPTH (IMG_BUF_DEPTH)) u_lcd_buf (
    .wr_clk (lcd_pclk_in), .wr_rst (lcd_rst), .wr_en (lbuf_wr_en), .wr_data (lbuf_wr_data), .full (lbuf_full),
    .rd_clk (sys_clk),     .rd_rst (sys_rst), .rd_en (out_rd_en), .rd_data (out_rd_data),
    .rd_valid (out_rd_valid), .empty (out_empty)
  );

  // ---------------------------------------------------------------- status
  status_regs u_status (
    .sys_clk, .sys_rst,
    .rd_addr (sts_rd_addr), .rd_data (sts_rd_data),
    .cif_status_sys (cif_status), .lcd_status_sys (lcd_status), .lcd_crc_sys (lcd_crc),
    .cif_clk (cif_pclk_in), .cif_rst, .cif_status (cif_status_px),
    .lcd_clk (lcd_pclk_in), .lcd_rst, .lcd_crc (lcd_crc_px), .lcd_status (lcd_status_px)
  );
endmodule
