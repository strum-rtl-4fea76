// tb_strum_adder_tree: random and extreme signed inputs to the 8-input tree,
// compared with a plain sum.
module tb_strum_adder_tree;
  logic signed [7:0][15:0] in;
  logic signed [18:0]      sum;
  int checks = 0, failures = 0;

  strum_adder_tree #(.N(8), .IW(16)) dut (.in, .sum);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int exp;
      exp = 0;
      for (int j = 0; j < 8; j++) begin
        int v;
        case (t)
          0: v = -32768;
          1: v = 32767;
          default: v = int'($urandom_range(65535)) - 32768;
        endcase
        in[j] = 16'(v);
        exp += v;
      end
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        if (failures < 10) $display("got %0d exp %0d", sum, exp);
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
