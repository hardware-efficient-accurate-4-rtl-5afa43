// lut6_2: dual-output 6-input lookup table (behaviour of the 7-series LUT6_2).
//
// Same two 5-input LUTs and I5-driven mux as lut6, but the output of the
// lower 5-input LUT (INIT[31:0]) is also brought out as o5. With I5 tied
// to 1 the cell computes two independent 5-input functions of the shared
// inputs I0..I4: o6 = INIT[32 + {I4..I0}] and o5 = INIT[{I4..I0}]. With
// I5 = 0 both outputs give the lower function. Purely combinational.
//
// The structure follows the usual description of the slice LUT; port
// names and the packed input vector (i[0] = I0) are this design's choice.
module lut6_2 #(
  parameter logic [63:0] INIT = 64'h0
) (
  input  logic [5:0] i,
  output logic       o5,
  output logic       o6
);

  logic lo, hi;

  lut5 #(.INIT(INIT[31:0]))  u_lo (.i(i[4:0]), .o(lo));
  lut5 #(.INIT(INIT[63:32])) u_hi (.i(i[4:0]), .o(hi));

  always_comb begin
    o5 = lo;
    o6 = i[5] ? hi : lo;
  end

endmodule
