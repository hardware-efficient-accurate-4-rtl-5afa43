// carry4: 4-bit fast carry chain (behaviour of the 7-series CARRY4).
//
// Each bit k has a carry mux and an XOR. The mux passes the incoming carry
// c[k] when s[k] = 1 (propagate) and di[k] when s[k] = 0 (generate/kill):
// co[k] = s[k] ? c[k] : di[k], and the sum bit is o[k] = s[k] ^ c[k].
// Carry into bit 0 is chosen by a mux between cyinit (input 0) and ci
// (input 1); ci is meant to come from the co[3] of the neighbouring chain.
// Driving s with a^b and di with a (or a&b) makes it an adder of a and b.
// Purely combinational: o and co settle one carry ripple after the inputs.
//
// The per-bit mux/XOR structure follows the CARRY4 description. The carry-
// in mux select is a configuration bit of the slice, modelled here as the
// parameter CIN_SEL rather than a pin.
module carry4
  import mult4_pkg::*;
#(
  parameter carry_in_sel_e CIN_SEL = CIN_CI
) (
  input  logic       ci,
  input  logic       cyinit,
  input  logic [3:0] di,
  input  logic [3:0] s,
  output logic [3:0] o,
  output logic [3:0] co
);

  logic carry;   // carry into the bit being evaluated

  always_comb begin
    carry = (CIN_SEL == CIN_CI) ? ci : cyinit;
    for (int k = 0; k < 4; k++) begin
      o[k]  = s[k] ^ carry;
      carry = s[k] ? carry : di[k];
      co[k] = carry;
    end
  end

endmodule
