// lut5: 5-input, 1-output lookup table, the half of a 6-input LUT.
//
// The output is the INIT bit addressed by the input vector: o = INIT[i],
// with i[0] the least significant address bit. Purely combinational, no
// timing of its own. Used inside lut6 and lut6_2, which hold two of them.
module lut5 #(
  parameter logic [31:0] INIT = 32'h0
) (
  input  logic [4:0] i,
  output logic       o
);

  always_comb o = INIT[i];

endmodule
