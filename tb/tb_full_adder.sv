// tb_full_adder -- exhaustive test of the one-bit full adder: all eight input
// combinations, sum and carry compared with the arithmetic sum a + b + ci.
module tb_full_adder;
  logic a, b, ci, s, co;
  int checks = 0, failures = 0;

  full_adder dut (.a, .b, .ci, .s, .co);

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, ci} = 3'(v);
      #1;
      checks++;
      if ({co, s} != 2'(int'(a) + int'(b) + int'(ci))) begin
        failures++;
        $display("FAIL: a=%0d b=%0d ci=%0d -> s=%0d co=%0d", a, b, ci, s, co);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
