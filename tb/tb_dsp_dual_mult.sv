// tb_dsp_dual_mult: checks the two products of one shared-input DSP slice
// against signed integer products over corner values and random operands.
module tb_dsp_dual_mult;
  logic signed [7:0]  a, b0, b1;
  logic signed [15:0] p0, p1;
  int checks = 0, failures = 0;

  dsp_dual_mult dut (.a_common(a), .b0, .b1, .p0, .p1);

  task automatic check(input int ia, input int ib0, input int ib1);
    a = 8'(ia); b0 = 8'(ib0); b1 = 8'(ib1);
    #1;
    checks += 2;
    if (int'(p0) != ia * ib0) begin failures++; $display("p0 %0d*%0d=%0d", ia, ib0, p0); end
    if (int'(p1) != ia * ib1) begin failures++; $display("p1 %0d*%0d=%0d", ia, ib1, p1); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(-128, -128, 127);
    check(127, -128, 127);
    check(0, 5, -7);
    check(-1, 1, -1);
    for (int i = 0; i < 2000; i++)
      check(int'($urandom_range(0, 255)) - 128, int'($urandom_range(0, 255)) - 128,
            int'($urandom_range(0, 255)) - 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
