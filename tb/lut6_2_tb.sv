// lut6_2_tb: exhaustive self-check of the dual-output LUT.
//
// Three lut6_2 instances (the multiplier's three dual-output truth tables)
// and one irregular pattern are driven with all 64 input vectors. O6 must
// equal INIT[{I5..I0}] and O5 must equal INIT[{I4..I0}] (lower half) for
// every vector, so both the I5=1 dual-output use and the I5=0 case are
// covered. One vector per nanosecond; a watchdog ends an overrunning run.
module lut6_2_tb;

  localparam logic [63:0] INIT_A = 64'h78887888A0A0A0A0;
  localparam logic [63:0] INIT_B = 64'h8778787808808080;
  localparam logic [63:0] INIT_C = 64'h7F807F8080008000;
  localparam logic [63:0] INIT_D = 64'hFEDC_BA98_7654_3210;

  logic [5:0] in;
  logic [3:0] o5, o6;
  int checks = 0;
  int failures = 0;

  lut6_2 #(.INIT(INIT_A)) u_a (.i(in), .o5(o5[0]), .o6(o6[0]));
  lut6_2 #(.INIT(INIT_B)) u_b (.i(in), .o5(o5[1]), .o6(o6[1]));
  lut6_2 #(.INIT(INIT_C)) u_c (.i(in), .o5(o5[2]), .o6(o6[2]));
  lut6_2 #(.INIT(INIT_D)) u_d (.i(in), .o5(o5[3]), .o6(o6[3]));

  function automatic logic pick(logic [63:0] t, int idx);
    return logic'((t >> idx) & 64'd1);
  endfunction

  task automatic check(logic got, logic exp, string what, int idx);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s input=%0d got=%0b exp=%0b", what, idx, got, exp);
    end
  endtask

  initial begin
    logic [63:0] t [4];
    t = '{INIT_A, INIT_B, INIT_C, INIT_D};
    for (int idx = 0; idx < 64; idx++) begin
      in = 6'(idx);
      #1;
      for (int n = 0; n < 4; n++) begin
        check(o6[n], pick(t[n], idx),      $sformatf("O6[%0d]", n), idx);
        check(o5[n], pick(t[n], idx % 32), $sformatf("O5[%0d]", n), idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
