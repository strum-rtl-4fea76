// tb_strum_barrel_shifter: exhaustive check of the barrel shifter for the
// full-range (L = 7) and reduced-range (L = 5) variants: every INT8
// activation against every 4-bit {sign, shift} code, compared with
// act * (+/-2^min(k, L)) computed by integer arithmetic.
module tb_strum_barrel_shifter;
  import strum_pkg::*;
  import strum_tb_pkg::*;

  act_t        act;
  logic [3:0]  code;
  prod_t       p7, p5;
  int          checks = 0, failures = 0;

  strum_barrel_shifter #(.L(7)) dut7 (.act(act), .code(code), .prod(p7));
  strum_barrel_shifter #(.L(5)) dut5 (.act(act), .code(code), .prod(p5));

  initial begin
    for (int a = -128; a < 128; a++) begin
      for (int c = 0; c < 16; c++) begin
        act = act_t'(a); code = 4'(c);
        #1;
        checks += 2;
        if (int'(p7) != a * pow2_weight(c, 4, 7)) begin
          failures++;
          if (failures < 10) $display("L7 act=%0d code=%0d got %0d", a, c, p7);
        end
        if (int'(p5) != a * pow2_weight(c, 4, 5)) begin
          failures++;
          if (failures < 10) $display("L5 act=%0d code=%0d got %0d", a, c, p5);
        end
      end
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
