// cif_fsm: unpacks 32-bit words from the CIF image buffer into 8, 16 or 24-bit
// pixels for the CIF pixel FIFO.
//
// Bytes are taken least significant first: in 8-bit mode a word carries four
// pixels, in 16-bit mode two, and in 24-bit mode three words carry four pixels
// (pixel bits [7:0] are the lower-addressed byte). A byte queue of 12 bytes sits
// between the two sides; a new word is requested whenever at most 8 bytes will
// remain after this clock's pixel, which with the one-clock read latency of the
// buffer sustains one pixel per clock in every format.
//
// Frames: at the start of a frame the FSM latches the pixel format and
// width x height from the configuration and then fetches exactly
// ceil(width*height*bytes/4) words. Bytes left in the last word of a frame are
// padding and are dropped, so each frame starts on a word boundary of the bus
// stream. Nothing moves while `enable` is low, and clearing `enable` in a frame
// abandons the frame (the queue is emptied). Back-pressure: no pixel is
// written while the pixel FIFO is full.
//
// The paper gives this block's job (32-bit input words converted to the CIF
// pixel bit-width and written to the pixel FIFO); the byte order, the queue and
// the frame alignment rule are this design's own.
module cif_fsm
  import cif_lcd_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  cif_cfg_t           cfg,
  // CIF image buffer read side
  output logic               buf_rd_en,
  input  logic [BUS_W-1:0]   buf_rd_data,
  input  logic               buf_rd_valid,
  input  logic               buf_empty,
  // CIF pixel FIFO write side
  output logic               pix_wr_en,
  output logic [PIX_W-1:0]   pix_wr_data,
  input  logic               pix_full,
  output logic               frame_active
);
  typedef enum logic [0:0] {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [95:0] q;          // byte queue, byte 0 = next byte out
  logic [3:0]  nb;         // bytes in the queue
  logic [1:0]  bpp;        // bytes per pixel of the current frame
  logic [31:0] pix_left;   // pixels still to write in this frame
  logic [31:0] words_left; // words still to request in this frame

  wire [31:0] frame_pix   = 32'(cfg.width) * 32'(cfg.height);
  wire [1:0]  cfg_bpp     = pix_bytes(cfg.pix_fmt);
  wire [33:0] frame_bytes = 34'(frame_pix) * 34'(cfg_bpp);
  wire [31:0] frame_words = 32'((frame_bytes + 34'd3) >> 2);

  wire        emit = (state == S_RUN) && (pix_left != 0) && (nb >= 4'(bpp)) && !pix_full;
  wire [3:0]  nb1  = emit ? nb - 4'(bpp) : nb;
  wire [3:0]  nb2  = buf_rd_valid ? nb1 + 4'd4 : nb1;

  assign buf_rd_en    = (state == S_RUN) && (words_left != 0) && !buf_empty && (nb2 <= 4'd8);
  assign pix_wr_en    = emit;
  assign frame_active = (state == S_RUN);

  always_comb begin
    unique case (bpp)
      2'd3:    pix_wr_data = q[23:0];
      2'd2:    pix_wr_data = {8'h00, q[15:0]};
      default: pix_wr_data = {16'h0000, q[7:0]};
    endcase
  end

  // queue after this clock: pixel bytes out at the bottom, the arriving word on top
  logic [95:0] q_next;
  always_comb begin
    q_next = emit ? (q >> (8 * int'(bpp))) : q;
    if (buf_rd_valid) q_next = q_next | (96'(buf_rd_data) << (8 * int'(nb1)));
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state <= S_IDLE; q <= '0; nb <= '0; bpp <= 2'd1; pix_left <= '0; words_left <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          q <= '0; nb <= '0;
          if (cfg.enable && frame_pix != 0) begin
            state      <= S_RUN;
            bpp        <= cfg_bpp;
            pix_left   <= frame_pix;
            words_left <= frame_words;
          end
        end
        S_RUN: begin
          q  <= q_next;
          if (!cfg.enable) state <= S_IDLE;          // abort: the frame is dropped
          nb <= nb2;
          if (buf_rd_en) words_left <= words_left - 1;
          if (emit) begin
            pix_left <= pix_left - 1;
            if (pix_left == 1) state <= S_IDLE;   // frame done: drop padding bytes
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a word may only arrive in a frame and never overflow the queue
  assert property (@(posedge clk) disable iff (rst) buf_rd_valid |-> nb1 <= 4'd8);
endmodule
