// mult4_11lut: exact unsigned 4x4-bit multiplier, P = A x B, mapped by hand
// onto eleven 6-input LUTs and two CARRY4 carry chains.
//
// The sixteen partial products AiBj are never formed as separate signals:
// each LUT reads raw bits of A and B and directly computes a column sum, a
// carry, or a propagate/generate pair of the final carry-propagate adder.
//   P0, P1  LUT 1 (dual output), plain logic.
//   P2      LUT 2, the parity of column 2 including the carry from column 1.
//   C0      LUT 3, the carry from column 2 into column 3.
//   S1      LUT 4, the part of column 3 that does not involve A3 or B3.
//   S3      LUT 6, the column-4 sum including the column-3 carry C1, which
//           reduces to A1B2 & A2B1.
//   Prop0/Gen0 .. Prop3/Gen3  LUTs 5, 7, 8, 9, 10, 11: per-column propagate
//           and generate bits of the adder for columns 3..6.
// Carry Chain A is a CARRY4 whose bits 0 and 1 only propagate the constant
// 1 from CYINIT, so its bit 2 (S = C0, DI = 0) delivers C0 as the carry into
// bit 3, where Prop0/Gen0 give P3. Its CO[3] feeds the CI of Carry Chain B,
// whose bits 0..2 take Prop1..3/Gen1..3 and give P4..P6 on O[2:0] and P7 on
// CO[2]; bit 3 of Chain B is unused (DI = 0, S = 1). Putting P3 in a chain
// of its own lets the column-3 carry reach the next chain over the
// dedicated carry wire instead of through general routing.
//
// The chain outputs that carry no product bit (O[2:0] and CO[2:0] of Chain
// A; O[3], CO[3] and CO[1:0] of Chain B) are left unconnected, as in the
// block diagram, which is why a linter reports them as unused.
//
// Interface: a, b in, p out, all unsigned. Fully combinational; no clock,
// no reset, no latency in cycles.
//
// Follows the published block diagram and LUT table: LUT count and types,
// LUT input orderings and INIT values, and the wiring to the two chains.
// This design's own decisions: CYINIT of Chain A is 1 and the select of
// Chain A's carry-in mux is CYINIT (neither is printed; 1 is the only value
// for which bit 2 of Chain A passes C0), the unused chain inputs take the
// printed constants with DI left of S, and the three INIT values that the
// table pairs with the wrong input ordering are used with the ordering they
// compute the named function for (see mult4_pkg).
module mult4_11lut
  import mult4_pkg::*;
(
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p
);

  // LUT outputs
  logic p0, p1, p2;
  logic c0, s1, s3;
  logic prop0, gen0, prop1, gen1, prop2, gen2, prop3, gen3;

  // carry chain ports
  logic [3:0] di_a, s_a, o_a, co_a;
  logic [3:0] di_b, s_b, o_b, co_b;

  // ------------------------------------------------------------------ LUTs
  // input vectors are written I5 first, I0 last
  lut6_2 #(.INIT(LUT1_INIT))  u_lut1  (.i({1'b1, 1'b1, a[1], b[0], b[1], a[0]}), .o5(p0),   .o6(p1));
  lut6   #(.INIT(LUT2_INIT))  u_lut2  (.i({a[1], b[1], a[0], b[0], a[2], b[2]}),            .o6(p2));
  lut6   #(.INIT(LUT3_INIT))  u_lut3  (.i({b[2], a[1], b[1], a[0], b[0], a[2]}),            .o6(c0));
  lut6   #(.INIT(LUT4_INIT))  u_lut4  (.i({b[0], b[1], a[0], a[2], b[2], a[1]}),            .o6(s1));
  lut6_2 #(.INIT(LUT5_INIT))  u_lut5  (.i({1'b1, b[0], a[3], s1, a[0], b[3]}),  .o5(gen0), .o6(prop0));
  lut6   #(.INIT(LUT6_INIT))  u_lut6  (.i({a[2], b[2], a[3], b[1], a[1], b[3]}),            .o6(s3));
  lut6_2 #(.INIT(LUT7_INIT))  u_lut7  (.i({1'b1, 1'b1, s3, a[3], s1, b[0]}),    .o5(gen1), .o6(prop1));
  lut6   #(.INIT(LUT8_INIT))  u_lut8  (.i({a[3], b[2], a[1], b[3], b[1], a[2]}),            .o6(prop2));
  lut6   #(.INIT(LUT9_INIT))  u_lut9  (.i({a[3], b[2], a[1], b[3], b[1], a[2]}),            .o6(gen2));
  lut6   #(.INIT(LUT10_INIT)) u_lut10 (.i({a[3], b[3], a[1], b[2], b[1], a[2]}),            .o6(prop3));
  lut6   #(.INIT(LUT11_INIT)) u_lut11 (.i({b[3], a[2], a[1], a[3], b[1], b[2]}),            .o6(gen3));

  // ----------------------------------------------------------- carry chains
  always_comb begin
    di_a = {gen0,  1'b0,  1'b0,  1'b0};
    s_a  = {prop0, c0,    1'b1,  1'b1};
    di_b = {1'b0,  gen3,  gen2,  gen1};
    s_b  = {1'b1,  prop3, prop2, prop1};
  end

  carry4 #(.CIN_SEL(CIN_CYINIT)) u_chain_a (
    .ci(1'b0), .cyinit(1'b1), .di(di_a), .s(s_a), .o(o_a), .co(co_a)
  );

  carry4 #(.CIN_SEL(CIN_CI)) u_chain_b (
    .ci(co_a[3]), .cyinit(1'b0), .di(di_b), .s(s_b), .o(o_b), .co(co_b)
  );

  always_comb p = {co_b[2], o_b[2:0], o_a[3], p2, p1, p0};

endmodule
