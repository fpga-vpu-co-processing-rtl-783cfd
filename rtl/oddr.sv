// oddr: behavioural model of an FPGA double-data-rate output register (the
// vendor ODDR primitive, opposite-edge mode), used to forward the CIF pixel
// clock to the CIF_pclk_out pin. It is a model of a device primitive, not
// logic meant for synthesis: a synthesis flow maps the instance to the device's
// own ODDR cell.
//
// D1 is captured on the rising edge of C and D2 on the falling edge; Q shows
// the D1 capture while C is high and the D2 capture while C is low, with a
// small delay. With D1 = 1 and D2 = 0, Q is a copy of C. CE gates both
// captures; R (asynchronous, active high) forces both captures to 0 and S to 1
// (R wins).
//
// The block diagram shows the ODDR between CIF_pclk_in and CIF_pclk_out; the
// ports follow the usual primitive, and the delay is this model's own.
module oddr (
  input  logic C,
  input  logic CE,
  input  logic D1,
  input  logic D2,
  input  logic R,
  input  logic S,
  output logic Q
);
  logic q_pos, q_neg;

  // R and S act at once; R wins
  wire rs = R | S;

  always @(posedge C or posedge rs) begin
    if (rs)      q_pos <= !R;
    else if (CE) q_pos <= D1;
  end

  always @(negedge C or posedge rs) begin
    if (rs)      q_neg <= !R;
    else if (CE) q_neg <= D2;
  end

  assign #1ps Q = R ? 1'b0 : S ? 1'b1 : C ? q_pos : q_neg;
endmodule
