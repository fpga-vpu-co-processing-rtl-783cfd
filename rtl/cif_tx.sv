// cif_tx: CIF (parallel camera interface) transmitter towards the VPU, with the
// CRC-16/XMODEM of each frame appended to the frame's last line.
//
// Output timing, all registered on the CIF pixel clock, one pixel per clock:
//   vsync  high for the whole frame: it rises, stays high `vblank` clocks before
//          the first line, through every line, and falls on the same clock
//          edge as hsync after the last pixel; it then stays low at least `vblank` clocks before the
//          next frame.
//   hsync  high exactly while `pixel` carries a valid pixel of a line; each line
//          is preceded by at least `hblank` clocks with hsync low.
//   pixel  pixel value (8/16/24 bits, right aligned), zero while hsync is low.
// A line is started only when the whole line (`width` pixels) is already in the
// pixel FIFO, so hsync never breaks inside a line; this needs width <= FIFO
// depth. With crc_en set the last line is longer: it carries the frame CRC as
// two extra pixels in 8-bit mode (CRC[15:8] then CRC[7:0]) and as one extra
// pixel in 16-bit and 24-bit mode (CRC right aligned). The CRC covers every
// image pixel of the frame, each pixel's bytes most significant first.
//
// Status (CIF clock domain): frames sent, CRC of the last frame, lines and image
// pixels sent in the current or last frame. Format, size and blanking are
// latched at the start of each frame. Clearing `enable` while the transmitter
// waits for a line ends the frame early (vsync falls) without counting it.
//
// The paper gives hsync/vsync generation, the pixel FIFO as source, and a
// CRC-16/XMODEM appended to the last line; the exact sync timing, the blanking
// parameters, the whole-line start rule and the CRC pixel layout are this
// design's own.
module cif_tx
  import cif_lcd_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 2048
) (
  input  logic                      clk,
  input  logic                      rst,
  input  cif_cfg_t                  cfg,
  // CIF pixel FIFO read side
  output logic                      pix_rd_en,
  input  logic [PIX_W-1:0]          pix_rd_data,
  input  logic                      pix_rd_valid,
  input  logic [$clog2(FIFO_DEPTH):0] pix_count,
  // CIF pins
  output logic                      cif_hsync,
  output logic                      cif_vsync,
  output logic [PIX_W-1:0]          cif_pixel,
  // status
  output cif_status_t               status,
  output logic                      frame_done      // one-clock pulse when vsync falls
);
  typedef enum logic [2:0] {S_IDLE, S_VFRONT, S_HBLANK, S_LINE, S_DRAIN, S_CRC, S_VBACK, S_ABORT} state_e;
  state_e state;

  cif_cfg_t    fc;          // configuration latched for this frame
  logic [DIM_W-1:0] cnt;    // blanking / pixel counter
  logic [DIM_W-1:0] line;   // current line
  logic        crc_idx;     // which CRC pixel (8-bit mode has two)
  logic [15:0] crc;
  logic        crc_init;
  logic [31:0] frames_tx;
  logic [31:0] pixels_tx;
  logic [15:0] lines_tx;
  logic [15:0] last_crc;

  wire [1:0]  bpp        = pix_bytes(fc.pix_fmt);
  wire        last_line  = (line == fc.height - 1'b1);
  wire        line_ready = (32'(pix_count) >= 32'(fc.width)) || (32'(pix_count) == FIFO_DEPTH);
  wire        start_ok   = cfg.enable && cfg.width != 0 && cfg.height != 0 &&
                           ((32'(pix_count) >= 32'(cfg.width)) || (32'(pix_count) == FIFO_DEPTH));

  assign pix_rd_en = (state == S_LINE);

  crc16_xmodem u_crc (
    .clk, .rst,
    .init     (crc_init),
    .en       (pix_rd_valid),
    .nbytes   (bpp),
    .pixel    (pix_rd_data),
    .crc      (crc),
    .crc_next ()
  );
  assign crc_init = (state == S_VFRONT);

  logic [PIX_W-1:0] crc_pixel;
  always_comb begin
    if (bpp == 2'd1) crc_pixel = crc_idx ? {16'h0, crc[7:0]} : {16'h0, crc[15:8]};
    else             crc_pixel = {8'h00, crc};
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state <= S_IDLE; fc <= '0; cnt <= '0; line <= '0; crc_idx <= 1'b0;
      cif_hsync <= 1'b0; cif_vsync <= 1'b0; cif_pixel <= '0;
      frames_tx <= '0; pixels_tx <= '0; lines_tx <= '0; last_crc <= '0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      // pixel path: image pixels come straight from the FIFO read port
      cif_hsync <= pix_rd_valid || (state == S_CRC);
      cif_pixel <= pix_rd_valid ? pix_rd_data : (state == S_CRC) ? crc_pixel : '0;
      if (pix_rd_valid) pixels_tx <= pixels_tx + 1;

      unique case (state)
        S_IDLE: begin
          cif_vsync <= 1'b0;
          if (cnt != 0) cnt <= cnt - 1'b1;          // vsync-low gap after a frame
          else if (start_ok) begin
            fc        <= cfg;
            state     <= S_VFRONT;
            cif_vsync <= 1'b1;
            cnt       <= cfg.vblank;
            line      <= '0;
            pixels_tx <= '0;
            lines_tx  <= '0;
          end
        end
        S_VFRONT: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin state <= S_HBLANK; cnt <= fc.hblank; end
        end
        S_HBLANK: begin
          if (!cfg.enable) state <= S_ABORT;         // disabled between lines: close the frame
          else if (cnt != 0) cnt <= cnt - 1'b1;
          else if (line_ready) begin state <= S_LINE; cnt <= fc.width - 1'b1; end
        end
        S_LINE: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else state <= S_DRAIN;                    // last read issued
        end
        S_DRAIN: begin                              // last image pixel of the line leaves
          lines_tx <= lines_tx + 1;
          crc_idx  <= 1'b0;
          if (last_line && fc.crc_en) state <= S_CRC;
          else if (last_line)         state <= S_VBACK;
          else begin state <= S_HBLANK; cnt <= fc.hblank; line <= line + 1'b1; end
        end
        S_CRC: begin
          crc_idx <= 1'b1;
          if (bpp != 2'd1 || crc_idx) state <= S_VBACK;
        end
        S_VBACK: begin                              // hsync has fallen; close the frame
          cif_vsync  <= 1'b0;
          frames_tx  <= frames_tx + 1;
          last_crc   <= crc;
          frame_done <= 1'b1;
          cnt        <= fc.vblank;
          state      <= S_IDLE;
        end
        S_ABORT: begin                              // frame cut short: not counted
          cif_vsync <= 1'b0;
          cnt       <= fc.vblank;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign status = '{frames_tx: frames_tx, crc: last_crc, lines_tx: lines_tx, pixels_tx: pixels_tx};

  // hsync only inside vsync
  assert property (@(posedge clk) disable iff (rst) cif_hsync |-> cif_vsync);
endmodule
