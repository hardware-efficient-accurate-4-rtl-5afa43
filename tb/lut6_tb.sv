// lut6_tb: exhaustive self-check of the 6-input LUT.
//
// Four lut6 instances with different truth tables (three taken from the
// multiplier, one irregular pattern) are driven with all 64 input vectors;
// each output must equal bit {I5..I0} of its INIT word. One vector is
// applied per nanosecond; a watchdog ends the run if it overruns.
module lut6_tb;

  localparam logic [63:0] INIT_A = 64'h653F6AC06AC06AC0;
  localparam logic [63:0] INIT_B = 64'h8000000000000000;
  localparam logic [63:0] INIT_C = 64'hE0A0800000000000;
  localparam logic [63:0] INIT_D = 64'h0123_4567_89AB_CDEF;

  logic [5:0] in;
  logic [3:0] out;
  int checks = 0;
  int failures = 0;

  lut6 #(.INIT(INIT_A)) u_a (.i(in), .o6(out[0]));
  lut6 #(.INIT(INIT_B)) u_b (.i(in), .o6(out[1]));
  lut6 #(.INIT(INIT_C)) u_c (.i(in), .o6(out[2]));
  lut6 #(.INIT(INIT_D)) u_d (.i(in), .o6(out[3]));

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
    for (int idx = 0; idx < 64; idx++) begin
      in = 6'(idx);
      #1;
      check(out[0], pick(INIT_A, idx), "A", idx);
      check(out[1], pick(INIT_B, idx), "B", idx);
      check(out[2], pick(INIT_C, idx), "C", idx);
      check(out[3], pick(INIT_D, idx), "D", idx);
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
