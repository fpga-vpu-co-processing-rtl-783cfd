// tb_status_regs: self-checking test of the status registers.
// Random CIF and LCD status records are set in their pixel-clock domains; after
// the crossing time every read address must return the fields of the word map,
// and the record outputs must equal the inputs.
module tb_status_regs;
  import cif_lcd_pkg::*;
  logic sys_clk = 0, cif_clk = 0, lcd_clk = 0;
  logic sys_rst = 1, cif_rst = 1, lcd_rst = 1;
  logic [2:0] rd_addr = 0;
  logic [31:0] rd_data;
  cif_status_t cif_status, cif_status_sys;
  lcd_status_t lcd_status, lcd_status_sys;
  logic [15:0] lcd_crc, lcd_crc_sys;
  int checks = 0, failures = 0;

  always #5ns  sys_clk = ~sys_clk;
  always #9ns  cif_clk = ~cif_clk;
  always #12ns lcd_clk = ~lcd_clk;

  status_regs dut (.*);

  task automatic rd(input logic [2:0] a, input logic [31:0] exp);
    @(negedge sys_clk); rd_addr = a; #1ns;
    checks++; if (rd_data !== exp) begin failures++; $display("FAIL: addr %0d = %h exp %h", a, rd_data, exp); end
  endtask

  initial begin
    cif_status = '0; lcd_status = '0; lcd_crc = '0;
    #50ns; sys_rst = 0; cif_rst = 0; lcd_rst = 0;
    for (int i = 0; i < 8; i++) begin
      cif_status = {$urandom, $urandom, $urandom};
      lcd_status = {1'($urandom), $urandom, $urandom};
      lcd_crc = 16'($urandom);
      repeat (12) @(negedge lcd_clk);
      rd(0, cif_status.frames_tx);
      rd(1, {cif_status.lines_tx, cif_status.crc});
      rd(2, cif_status.pixels_tx);
      rd(3, lcd_status.frames_rx);
      rd(4, lcd_status.pixels_rx);
      rd(5, {15'd0, lcd_status.overflow, lcd_crc});
      rd(6, 32'd0);
      checks++;
      if (cif_status_sys !== cif_status || lcd_status_sys !== lcd_status || lcd_crc_sys !== lcd_crc) begin
        failures++; $display("FAIL: records"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
