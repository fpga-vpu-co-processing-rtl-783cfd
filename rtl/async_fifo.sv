// async_fifo: dual-clock FIFO used as the CIF and LCD cross-clock image buffers.
//
// The write side and the read side each run on their own clock. Read and write
// pointers are kept in binary for addressing and passed to the other domain in
// Gray code through two-flop synchronizers, so full and empty are exact in the
// domain that uses them and conservative (late to clear) in the other. The
// storage is a plain array with a registered read port that a synthesis tool can
// map onto block RAM.
//
// Interface: native FIFO style. Write: wr_en/wr_data with full. Read: show-ahead
// is not used; rd_en pops the word that appears on rd_data one clock later and
// rd_valid marks it. rd_en while empty and wr_en while full are ignored.
// Each side has its own active-high reset, which the instantiating logic derives
// from one system reset synchronised into both clocks.
//
// The clock-domain crossing follows the paper's statement that its FIFOs can
// cross clock domains; the Gray-pointer structure, the depth and the read
// latency are this design's own choices.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024   // power of two
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_valid,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_rs1, wgray_rs2;   // write pointer in the read domain
  logic [AW:0] rgray_ws1, rgray_ws2;   // read pointer in the write domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain
  wire          do_wr     = wr_en && !full;
  wire [AW:0]   wbin_nxt  = wbin + (AW+1)'(do_wr);
  wire [AW:0]   wgray_nxt = bin2gray(wbin_nxt);

  always_ff @(posedge wr_clk) begin
    if (do_wr) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or posedge wr_rst) begin
    if (wr_rst) begin
      wbin <= '0; wgray <= '0; full <= 1'b0;
      rgray_ws1 <= '0; rgray_ws2 <= '0;
    end else begin
      wbin  <= wbin_nxt;
      wgray <= wgray_nxt;
      rgray_ws1 <= rgray;
      rgray_ws2 <= rgray_ws1;
      // full when the next write pointer equals the read pointer with the two MSBs inverted
      full <= (wgray_nxt == {~rgray_ws2[AW:AW-1], rgray_ws2[AW-2:0]});
    end
  end

  // ---------------- read domain
  wire          do_rd     = rd_en && !empty;
  wire [AW:0]   rbin_nxt  = rbin + (AW+1)'(do_rd);
  wire [AW:0]   rgray_nxt = bin2gray(rbin_nxt);

  always_ff @(posedge rd_clk) begin
    if (do_rd) rd_data <= mem[rbin[AW-1:0]];
  end

  always_ff @(posedge rd_clk or posedge rd_rst) begin
    if (rd_rst) begin
      rbin <= '0; rgray <= '0; empty <= 1'b1; rd_valid <= 1'b0;
      wgray_rs1 <= '0; wgray_rs2 <= '0;
    end else begin
      rbin  <= rbin_nxt;
      rgray <= rgray_nxt;
      rd_valid <= do_rd;
      wgray_rs1 <= wgray;
      wgray_rs2 <= wgray_rs1;
      empty <= (rgray_nxt == wgray_rs2);
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("async_fifo: DEPTH must be a power of two >= 4");
endmodule
