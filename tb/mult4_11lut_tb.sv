// mult4_11lut_tb: end-to-end exhaustive test of the 11-LUT 4x4 multiplier.
//
// Applies all 256 operand pairs (one per nanosecond; the design is purely
// combinational) and checks
//   * the product p against the integer product a * b, and
//   * every internal LUT output (C0, S1, S3, Prop0..3, Gen0..3) against
//     the column equations of the design, written here directly from the
//     partial products AiBj, so a LUT with a wrong truth table or a wrong
//     input order is caught where it sits, not only through the product.
// It also counts how often each carry mechanism of the design is used and
// counts a failure for any that never occurs: the column-2 carry C0 passed
// through bit 2 of Chain A, a carry crossing from Chain A to Chain B over
// the dedicated CI link, a carry generated (Gen=1) and one propagated
// (Prop=1 with carry in) inside Chain B, and P7 produced by the chain's
// carry output. All parameters of the top stay at their defaults.
module mult4_11lut_tb;

  logic [3:0] a, b;
  logic [7:0] p;
  int checks = 0;
  int failures = 0;

  int n_c0, n_cross, n_gen_b, n_prop_b, n_p7, n_gen2;

  mult4_11lut dut (.a(a), .b(b), .p(p));

  task automatic check(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0d b=%0d got=%0b exp=%0b", what, a, b, got, exp);
    end
  endtask

  task automatic check_mech(int n, string what);
    checks++;
    $display("mechanism %-34s occurred %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    n_c0 = 0; n_cross = 0; n_gen_b = 0; n_prop_b = 0; n_p7 = 0; n_gen2 = 0;
    for (int v = 0; v < 256; v++) begin
      logic [3:0][3:0] g;   // g[i][j] = Ai & Bj
      logic s1, s2, c1, s3, c2, c3, s4, c4, c0;
      logic prop0, gen0, prop1, gen1, prop2, gen2, prop3, gen3;
      int   prod;
      a = v[3:0];
      b = v[7:4];
      #1;
      prod = int'(a) * int'(b);
      checks++;
      if (p !== 8'(prod)) begin
        failures++;
        $display("FAIL product a=%0d b=%0d got=%0d exp=%0d", a, b, p, prod);
      end

      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          g[i][j] = a[i] & b[j];
      c0    = (g[1][1] & g[0][2]) | (g[2][0] & g[1][1]) | (g[2][0] & g[0][2])
            | (g[0][1] & g[1][0]);
      s1    = g[1][2] ^ g[2][1] ^ (g[1][1] & g[0][2] & g[2][0]);
      prop0 = s1 ^ g[3][0] ^ g[0][3];
      gen0  = (s1 ^ g[3][0]) & g[0][3];
      s2    = g[3][1] ^ g[2][2] ^ g[1][3];
      c1    = g[1][2] & g[2][1];
      s3    = s2 ^ c1;
      prop1 = s3 ^ (s1 & g[3][0]);
      gen1  = s3 & (s1 & g[3][0]);
      c2    = (g[3][1] & g[2][2]) | (g[1][3] & g[2][2]) | (g[3][1] & g[1][3]);
      c3    = s2 & c1;
      s4    = g[3][2] ^ g[2][3] ^ c2;
      prop2 = s4 ^ c3;
      gen2  = s4 & c3;
      c4    = (g[3][2] & g[2][3]) | (g[3][2] & c2) | (g[2][3] & c2);
      prop3 = g[3][3] ^ c4;
      gen3  = g[3][3] & c4;

      check(dut.c0,    c0,    "C0");
      check(dut.s1,    s1,    "S1");
      check(dut.s3,    s3,    "S3");
      check(dut.prop0, prop0, "Prop0");
      check(dut.gen0,  gen0,  "Gen0");
      check(dut.prop1, prop1, "Prop1");
      check(dut.gen1,  gen1,  "Gen1");
      check(dut.prop2, prop2, "Prop2");
      check(dut.gen2,  gen2,  "Gen2");
      check(dut.prop3, prop3, "Prop3");
      check(dut.gen3,  gen3,  "Gen3");

      if (dut.c0) n_c0++;
      if (dut.co_a[3]) n_cross++;
      if ((dut.gen1 && !dut.prop1) || (dut.gen2 && !dut.prop2) || (dut.gen3 && !dut.prop3))
        n_gen_b++;
      if ((dut.prop1 && dut.co_a[3]) || (dut.prop2 && dut.co_b[0]) || (dut.prop3 && dut.co_b[1]))
        n_prop_b++;
      if (dut.co_b[2]) n_p7++;
      if (dut.gen2) n_gen2++;
    end

    check_mech(n_c0,     "C0 carried through Chain A bit 2");
    check_mech(n_cross,  "carry Chain A -> Chain B over CI");
    check_mech(n_gen_b,  "carry generated in Chain B");
    check_mech(n_prop_b, "carry propagated in Chain B");
    check_mech(n_p7,     "P7 from Chain B CO[2]");
    check_mech(n_gen2,   "Gen2 (all of A1..A3, B1..B3 set)");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
