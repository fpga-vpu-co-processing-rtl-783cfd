// cdc_handshake: carries a multi-bit register value from one clock domain to
// another without tearing, using a toggle request/acknowledge handshake.
//
// The source side samples `src_data` into a holding register and toggles
// `req`. The destination sees the toggle through two flip-flops, copies the
// (by then stable) holding register into `dst_data`, pulses `dst_update` and
// returns the toggle as `ack`, which reaches the source through two more
// flip-flops. The source then samples again. The transfer therefore repeats
// continuously, and `dst_data` follows `src_data` with a delay of a few clocks
// of each domain; every value it shows is one that `src_data` held in full.
// A value that changes faster than one round trip may be skipped. After reset
// `dst_data` is zero until the first transfer lands.
//
// The paper states only that its control and status registers cross clock
// domains; this handshake is the simplest structure that does it.
module cdc_handshake #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             src_clk,
  input  logic             src_rst,
  input  logic [WIDTH-1:0] src_data,
  input  logic             dst_clk,
  input  logic             dst_rst,
  output logic [WIDTH-1:0] dst_data,
  output logic             dst_update
);
  logic [WIDTH-1:0] hold;
  logic req, ack_s1, ack_s2;           // source domain
  logic req_s1, req_s2, req_s3;        // destination domain (req_s3 doubles as ack)

  always_ff @(posedge src_clk or posedge src_rst) begin
    if (src_rst) begin
      hold <= '0; req <= 1'b0; ack_s1 <= 1'b0; ack_s2 <= 1'b0;
    end else begin
      ack_s1 <= req_s3;
      ack_s2 <= ack_s1;
      if (ack_s2 == req) begin          // previous transfer acknowledged
        hold <= src_data;
        req  <= ~req;
      end
    end
  end

  always_ff @(posedge dst_clk or posedge dst_rst) begin
    if (dst_rst) begin
      req_s1 <= 1'b0; req_s2 <= 1'b0; req_s3 <= 1'b0; dst_data <= '0; dst_update <= 1'b0;
    end else begin
      req_s1 <= req;
      req_s2 <= req_s1;
      req_s3 <= req_s2;
      dst_update <= (req_s2 != req_s3);
      if (req_s2 != req_s3) dst_data <= hold;
    end
  end
endmodule
