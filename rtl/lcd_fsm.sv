// lcd_fsm: packs 8, 16 or 24-bit pixels from the LCD pixel FIFO into 32-bit
// words for the LCD image buffer.
//
// The packing is the mirror of the CIF side: bytes go into the word least
// significant first (four 8-bit pixels, two 16-bit pixels, or four 24-bit pixels
// in three words). A 12-byte queue sits between the sides; a pixel is
// requested from the FIFO whenever at most 8 bytes will remain after this
// clock's word, which keeps up with one pixel per clock. The frame length is
// width x height pixels from the LCD configuration, latched at the start of a
// frame; after its last pixel a partly filled word is sent with zero padding,
// so every frame starts on a new bus word. Clearing `enable` abandons the
// frame in progress. Back-pressure: no word is written
// while the image buffer is full, and then pixels wait in the pixel FIFO.
//
// The paper gives the conversion of the LCD pixel formats (8/16/24) into 32-bit
// words written to the LCD image buffer; the byte order, the queue and the
// padding rule are this design's own.
module lcd_fsm
  import cif_lcd_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  lcd_cfg_t           cfg,
  // LCD pixel FIFO read side
  output logic               pix_rd_en,
  input  logic [PIX_W-1:0]   pix_rd_data,
  input  logic               pix_rd_valid,
  input  logic               pix_empty,
  // LCD image buffer write side
  output logic               buf_wr_en,
  output logic [BUS_W-1:0]   buf_wr_data,
  input  logic               buf_full,
  output logic               frame_active
);
  typedef enum logic [0:0] {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [95:0] q;          // byte queue, byte 0 = oldest
  logic [3:0]  nb;
  logic [1:0]  bpp;
  logic [31:0] req_left;   // pixels still to request
  logic [31:0] arr_left;   // pixels still to arrive

  wire [31:0] frame_pix = 32'(cfg.width) * 32'(cfg.height);

  wire        flush = (arr_left == 0) && (nb != 0);
  wire        emit  = (state == S_RUN) && ((nb >= 4'd4) || flush) && !buf_full;
  wire [3:0]  nb1   = emit ? ((nb >= 4'd4) ? nb - 4'd4 : 4'd0) : nb;
  wire [3:0]  nb2   = pix_rd_valid ? nb1 + 4'(bpp) : nb1;

  assign pix_rd_en    = (state == S_RUN) && (req_left != 0) && !pix_empty && (nb2 <= 4'd8);
  assign buf_wr_en    = emit;
  assign buf_wr_data  = q[31:0];
  assign frame_active = (state == S_RUN);

  // queue after this clock: a word out at the bottom, the arriving pixel on top
  logic [95:0] q_next;
  logic [23:0] p_in;
  always_comb begin
    q_next = emit ? (q >> 32) : q;
    if (emit && nb < 4'd4) q_next = '0;             // padded word of a frame end
    p_in = (bpp == 2'd3) ? pix_rd_data :
           (bpp == 2'd2) ? {8'h00, pix_rd_data[15:0]} : {16'h0000, pix_rd_data[7:0]};
    if (pix_rd_valid) q_next = q_next | (96'(p_in) << (8 * int'(nb1)));
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state <= S_IDLE; q <= '0; nb <= '0; bpp <= 2'd1; req_left <= '0; arr_left <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          q <= '0; nb <= '0;
          if (cfg.enable && frame_pix != 0) begin
            state    <= S_RUN;
            bpp      <= pix_bytes(cfg.pix_fmt);
            req_left <= frame_pix;
            arr_left <= frame_pix;
          end
        end
        S_RUN: begin
          q  <= q_next;
          if (!cfg.enable) state <= S_IDLE;          // abort: the frame is dropped
          nb <= nb2;
          if (pix_rd_en)    req_left <= req_left - 1;
          if (pix_rd_valid) arr_left <= arr_left - 1;
          if (arr_left == 0 && nb2 == 0 && !pix_rd_valid) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst) pix_rd_valid |-> (state == S_RUN && arr_left != 0));
endmodule
