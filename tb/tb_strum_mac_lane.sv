// tb_strum_mac_lane: checks the three lane builds. A lane with both units
// follows use_shift (1 = shifter, 0 = INT8 multiplier); a multiplier-only
// lane always multiplies; a shifter-only lane always shifts. An idle lane
// (valid = 0) must output zero. Random operands, expected values from
// integer arithmetic.
module tb_strum_mac_lane;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  logic   valid, use_shift;
  act_t   act;
  wbyte_t wf;
  prod_t  p_both, p_mul, p_sh;
  int     checks = 0, failures = 0;

  strum_mac_lane #(.HAS_MULT(1), .HAS_SHIFT(1)) u_both (.valid, .use_shift, .act, .wfield(wf), .prod(p_both));
  strum_mac_lane #(.HAS_MULT(1), .HAS_SHIFT(0)) u_mul  (.valid, .use_shift, .act, .wfield(wf), .prod(p_mul));
  strum_mac_lane #(.HAS_MULT(0), .HAS_SHIFT(1)) u_sh   (.valid, .use_shift, .act, .wfield(wf), .prod(p_sh));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: act=%0d wf=%0d v=%0b s=%0b got %0d exp %0d", what, act, wf, valid, use_shift, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int a, w, code, em, es;
      a = $urandom_range(255) - 128;
      w = $urandom_range(255);
      valid = ($urandom_range(7) != 0);
      use_shift = $urandom_range(1);
      act = act_t'(a); wf = wbyte_t'(w);
      #1;
      code = w & 15;
      em = a * ((w >= 128) ? w - 256 : w);
      es = a * pow2_weight(code, 4, 7);
      check(int'(p_both), valid ? (use_shift ? es : em) : 0, "both");
      check(int'(p_mul),  valid ? em : 0, "mult-only");
      check(int'(p_sh),   valid ? es : 0, "shift-only");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
