// tb_sa_adder -- test of the W-bit adder/subtractor in all four builds
// (behavioural or full-adder ripple chain, add or subtract).  Random and corner
// operands; results compared with integer arithmetic modulo 2^W.
module tb_sa_adder;
  localparam int W = 13;
  logic [W-1:0] a, b;
  logic [W-1:0] y_ba, y_bs, y_sa, y_ss;
  int checks = 0, failures = 0;

  sa_adder #(.W(W), .SUB(1'b0), .STRUCTURAL(1'b0)) u_ba (.a, .b, .y(y_ba));
  sa_adder #(.W(W), .SUB(1'b1), .STRUCTURAL(1'b0)) u_bs (.a, .b, .y(y_bs));
  sa_adder #(.W(W), .SUB(1'b0), .STRUCTURAL(1'b1)) u_sa (.a, .b, .y(y_sa));
  sa_adder #(.W(W), .SUB(1'b1), .STRUCTURAL(1'b1)) u_ss (.a, .b, .y(y_ss));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input int av, input int bv);
    int sum, dif;
    a = W'(av);
    b = W'(bv);
    #1;
    sum = (av + bv) & ((1 << W) - 1);
    dif = (av - bv) & ((1 << W) - 1);
    checks += 4;
    if (int'(y_ba) != sum) begin failures++; $display("FAIL behav add %0d+%0d=%0d", av, bv, y_ba); end
    if (int'(y_sa) != sum) begin failures++; $display("FAIL struct add %0d+%0d=%0d", av, bv, y_sa); end
    if (int'(y_bs) != dif) begin failures++; $display("FAIL behav sub %0d-%0d=%0d", av, bv, y_bs); end
    if (int'(y_ss) != dif) begin failures++; $display("FAIL struct sub %0d-%0d=%0d", av, bv, y_ss); end
  endtask

  initial begin
    check_one(0, 0);
    check_one((1 << W) - 1, 1);
    check_one(0, 1);
    check_one(1 << (W - 1), 1 << (W - 1));
    check_one((1 << (W - 1)) - 1, 1);
    for (int i = 0; i < 2000; i++)
      check_one(int'($urandom % (1 << W)), int'($urandom % (1 << W)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
