// mult4_pkg: constants and types shared by the 11-LUT 4-bit multiplier.
//
// Holds the carry-in source selector of the CARRY4 model and the truth
// tables (INIT values) of the eleven LUTs. A LUT's output for input vector
// {I5,I4,I3,I2,I1,I0} is bit INIT[{I5..I0}]; for a dual-output LUT the O5
// output reads the lower 32 bits, INIT[{I4..I0}].
//
// The INIT values are the published ones. The published table pairs three
// of them with the wrong row (LUT 2 with LUT 3, LUT 8 with LUT 9, LUT 10
// with LUT 11): each value only computes the named function when it is
// used with the input ordering listed on the other row of the pair. Here
// every value travels together with the input ordering it was derived for,
// and the resulting LUT is placed where its function belongs (see
// mult4_11lut). The LUT 7 ordering uses S3 in position I3 (the block
// diagram shows S3; the table prints B3, which cannot give Prop1).
package mult4_pkg;

  // Carry-in source of a CARRY4: the CYINIT pin (mux input 0) or the CI
  // pin that is hard-wired to the CO[3] of the adjacent CARRY4 (input 1).
  typedef enum logic {
    CIN_CYINIT = 1'b0,
    CIN_CI     = 1'b1
  } carry_in_sel_e;

  // LUT  1 (LUT6_2)  I0..I5 = A0, B1, B0, A1, 1, 1      O6 = P1,    O5 = P0
  localparam logic [63:0] LUT1_INIT  = 64'h78887888A0A0A0A0;
  // LUT  2 (LUT6)    I0..I5 = B2, A2, B0, A0, B1, A1    O6 = P2
  localparam logic [63:0] LUT2_INIT  = 64'h653F6AC06AC06AC0;
  // LUT  3 (LUT6)    I0..I5 = A2, B0, A0, B1, A1, B2    O6 = C0
  localparam logic [63:0] LUT3_INIT  = 64'hF8808080C8000000;
  // LUT  4 (LUT6)    I0..I5 = A1, B2, A2, A0, B1, B0    O6 = S1
  localparam logic [63:0] LUT4_INIT  = 64'hF878888878788888;
  // LUT  5 (LUT6_2)  I0..I5 = B3, A0, S1, A3, B0, 1     O6 = Prop0, O5 = Gen0
  localparam logic [63:0] LUT5_INIT  = 64'h8778787808808080;
  // LUT  6 (LUT6)    I0..I5 = B3, A1, B1, A3, B2, A2    O6 = S3
  localparam logic [63:0] LUT6_INIT  = 64'h47B7788878887888;
  // LUT  7 (LUT6_2)  I0..I5 = B0, S1, A3, S3, 1, 1      O6 = Prop1, O5 = Gen1
  localparam logic [63:0] LUT7_INIT  = 64'h7F807F8080008000;
  // LUT  8 (LUT6)    I0..I5 = A2, B1, B3, A1, B2, A3    O6 = Prop2
  localparam logic [63:0] LUT8_INIT  = 64'h37D760A008A0A0A0;
  // LUT  9 (LUT6)    I0..I5 = A2, B1, B3, A1, B2, A3    O6 = Gen2
  localparam logic [63:0] LUT9_INIT  = 64'h8000000000000000;
  // LUT 10 (LUT6)    I0..I5 = A2, B1, B2, A1, B3, A3    O6 = Prop3
  localparam logic [63:0] LUT10_INIT = 64'h175F8080A0000000;
  // LUT 11 (LUT6)    I0..I5 = B2, B1, A3, A1, A2, B3    O6 = Gen3
  localparam logic [63:0] LUT11_INIT = 64'hE0A0800000000000;

endpackage
