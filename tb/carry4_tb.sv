// carry4_tb: exhaustive self-check of the CARRY4 model as an adder.
//
// For every pair of 4-bit operands x, y and every carry-in, the chain gets
// S = x ^ y and DI = x, which covers all four (S, DI) combinations in
// every bit position. The reference is plain integer addition: O must be
// the low 4 bits of x + y + cin and CO[k] the carry out of bit k, i.e. bit
// k+1 of x[k:0] + y[k:0] + cin. Two instances check both settings of the
// carry-in mux: one takes the carry from CI, the other from CYINIT, and
// each is driven with the opposite value on its unselected pin.
module carry4_tb
  import mult4_pkg::*;
;

  logic [3:0] x, y;
  logic       cin;
  logic [3:0] o_ci, co_ci, o_cy, co_cy;
  int checks = 0;
  int failures = 0;

  carry4 #(.CIN_SEL(CIN_CI)) u_ci (
    .ci(cin), .cyinit(~cin), .di(x), .s(x ^ y), .o(o_ci), .co(co_ci)
  );
  carry4 #(.CIN_SEL(CIN_CYINIT)) u_cy (
    .ci(~cin), .cyinit(cin), .di(x), .s(x ^ y), .o(o_cy), .co(co_cy)
  );

  task automatic check(logic [3:0] got, logic [3:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s x=%0d y=%0d cin=%0b got=%b exp=%b", what, x, y, cin, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 512; v++) begin
      logic [3:0] exp_o, exp_co;
      x   = v[3:0];
      y   = v[7:4];
      cin = v[8];
      #1;
      exp_o = 4'(int'(x) + int'(y) + int'(cin));
      for (int k = 0; k < 4; k++) begin
        int mask, sum;
        mask = (1 << (k + 1)) - 1;
        sum  = (int'(x) & mask) + (int'(y) & mask) + int'(cin);
        exp_co[k] = sum[k + 1];
      end
      check(o_ci,  exp_o,  "O  via CI");
      check(co_ci, exp_co, "CO via CI");
      check(o_cy,  exp_o,  "O  via CYINIT");
      check(co_cy, exp_co, "CO via CYINIT");
    end
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
