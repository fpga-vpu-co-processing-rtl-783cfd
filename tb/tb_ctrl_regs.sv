// tb_ctrl_regs: self-checking test of the control registers.
// Writes each register through the system-clock port and checks that the CIF
// and LCD configuration records in their own clock domains take exactly the
// written fields within a bounded time, that an unmapped address changes
// nothing, and that reset leaves both directions disabled.
module tb_ctrl_regs;
  import cif_lcd_pkg::*;
  logic sys_clk = 0, cif_clk = 0, lcd_clk = 0;
  logic sys_rst = 1, cif_rst = 1, lcd_rst = 1;
  logic wr_en = 0;
  logic [2:0] wr_addr = 0;
  logic [31:0] wr_data = 0;
  cif_cfg_t cif_cfg, exp_cif;
  lcd_cfg_t lcd_cfg, exp_lcd;
  int checks = 0, failures = 0;

  always #5ns  sys_clk = ~sys_clk;
  always #10ns cif_clk = ~cif_clk;
  always #11ns lcd_clk = ~lcd_clk;

  ctrl_regs dut (.*);

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge sys_clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge sys_clk); wr_en = 0;
  endtask

  task automatic expect_cfg(input string what);
    repeat (12) @(negedge lcd_clk);
    checks++; if (cif_cfg !== exp_cif) begin failures++; $display("FAIL %s: cif %h exp %h", what, cif_cfg, exp_cif); end
    checks++; if (lcd_cfg !== exp_lcd) begin failures++; $display("FAIL %s: lcd %h exp %h", what, lcd_cfg, exp_lcd); end
  endtask

  initial begin
    #50ns; sys_rst = 0; cif_rst = 0; lcd_rst = 0;
    exp_cif = '0; exp_lcd = '0;
    expect_cfg("reset");
    for (int i = 0; i < 6; i++) begin
      automatic logic [31:0] d0 = $urandom, d1 = $urandom, d2 = $urandom, d3 = $urandom, d4 = $urandom;
      wr(0, d0); wr(1, d1); wr(2, d2); wr(3, d3); wr(4, d4); wr(5, $urandom); wr(7, $urandom);
      exp_cif = '{enable: d0[0], crc_en: d0[1], pix_fmt: d0[3:2], width: d1[15:0], height: d1[31:16],
                  hblank: d2[15:0], vblank: d2[31:16]};
      exp_lcd = '{enable: d3[0], pix_fmt: d3[2:1], width: d4[15:0], height: d4[31:16]};
      expect_cfg($sformatf("round %0d", i));
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
