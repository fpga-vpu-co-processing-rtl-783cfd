// tb_oddr: self-checking test of the ODDR model used for clock forwarding.
// With D1 = 1 and D2 = 0 the output must copy the clock; with data patterns
// the output must show D1 in the high half and D2 in the low half of each
// clock; CE low holds both captures; R forces 0 and S forces 1.
module tb_oddr;
  logic C = 0, CE = 1, D1 = 1, D2 = 0, R = 0, S = 0, Q;
  int checks = 0, failures = 0;

  always #10ns C = ~C;
  oddr dut (.*);

  task automatic chk(input logic exp, input string what);
    checks++; if (Q !== exp) begin failures++; $display("FAIL %s: Q=%b exp %b at %t", what, Q, exp, $time); end
  endtask

  initial begin
    logic a, b;
    R = 1; #15ns; R = 0;
    // clock forwarding
    repeat (10) begin
      @(posedge C); #2ns chk(1'b1, "forward high");
      @(negedge C); #2ns chk(1'b0, "forward low");
    end
    // data patterns: D1 is set before the rising edge, D2 before the falling edge
    repeat (20) begin
      @(negedge C); #1ns a = 1'($urandom); b = 1'($urandom); D1 = a; D2 = b;
      @(posedge C); #2ns chk(a, "D1 half");
      @(negedge C); #2ns chk(b, "D2 half");
    end
    // CE low holds
    @(posedge C); #1ns CE = 0; a = Q; D1 = ~D1; D2 = ~D2;
    @(posedge C); #2ns chk(a, "CE hold");
    CE = 1;
    // asynchronous reset and set
    #1ns R = 1; #1ns chk(1'b0, "R");
    R = 0; S = 1; #1ns chk(1'b1, "S");
    S = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
