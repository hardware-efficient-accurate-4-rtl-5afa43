// lut6: 6-input, 1-output lookup table (behaviour of the 7-series LUT6).
//
// Two 5-input LUTs share inputs I0..I4; the lower one holds INIT[31:0],
// the upper one INIT[63:32], and a 2:1 mux driven by I5 picks one of them
// (mux input 0 = lower half, input 1 = upper half). The result is
// o6 = INIT[{I5,I4,I3,I2,I1,I0}]. Purely combinational.
//
// The two-LUT5-plus-mux structure follows the usual description of the
// slice LUT; the port names (i, o6) and the packed input vector with
// i[0] = I0 are this design's choice.
module lut6 #(
  parameter logic [63:0] INIT = 64'h0
) (
  input  logic [5:0] i,
  output logic       o6
);

  logic lo, hi;

  lut5 #(.INIT(INIT[31:0]))  u_lo (.i(i[4:0]), .o(lo));
  lut5 #(.INIT(INIT[63:32])) u_hi (.i(i[4:0]), .o(hi));

  always_comb o6 = i[5] ? hi : lo;

endmodule
