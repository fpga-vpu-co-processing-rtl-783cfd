// rst_sync: reset synchroniser. The reset output asserts at once with the
// asynchronous input and releases two clocks after the input releases, in step
// with `clk`, so every flip-flop of the domain leaves reset on the same edge.
module rst_sync (
  input  logic clk,
  input  logic rst_in,
  output logic rst_out
);
  logic s1;
  always_ff @(posedge clk or posedge rst_in) begin
    if (rst_in) begin s1 <= 1'b1; rst_out <= 1'b1; end
    else        begin s1 <= 1'b0; rst_out <= s1;   end
  end
endmodule
