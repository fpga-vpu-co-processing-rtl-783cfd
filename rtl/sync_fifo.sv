// sync_fifo: single-clock FIFO with a fill level, used as the CIF and LCD pixel
// FIFOs.
//
// One write and one read per clock. Read is registered: rd_en pops the head and
// rd_data/rd_valid show it on the next clock. The fill level `count` counts the
// words stored, so the CIF transmitter can wait until a whole line is present
// before it starts the line. A write while full is dropped and pulses
// `overflow`; the LCD receiver, which cannot stall the VPU, reports that in its
// status. A synchronous clear empties the FIFO.
//
// The paper gives the pixel FIFOs' place and 24-bit width; depth, read latency
// and the fill-level output are this design's own.
module sync_fifo #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 2048   // power of two
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clear,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  output logic                     overflow,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     rd_valid,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign count = wptr - rptr;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
    if (do_rd) rd_data <= mem[rptr[AW-1:0]];
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      wptr <= '0; rptr <= '0; rd_valid <= 1'b0; overflow <= 1'b0;
    end else if (clear) begin
      wptr <= '0; rptr <= '0; rd_valid <= 1'b0; overflow <= 1'b0;
    end else begin
      wptr     <= wptr + (AW+1)'(do_wr);
      rptr     <= rptr + (AW+1)'(do_rd);
      rd_valid <= do_rd;
      overflow <= wr_en && full;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two >= 2");
endmodule
