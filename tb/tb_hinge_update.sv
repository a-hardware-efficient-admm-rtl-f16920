// tb_hinge_update: checks the shrinkage S_1 and the multiplier update on the
// three regions theta < 0, 0 <= theta <= 1, theta > 1, their borders, and
// random values, against a floating-point model.
module tb_hinge_update;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  fix_t theta, a_hat, u_new;
  int checks = 0, failures = 0;

  hinge_update dut (.theta, .a_hat, .u_new);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(real th);
    real ea;
    theta = r2fx(th);
    #1;
    ea = fx2r(theta);
    if (ea > 1.0) ea = ea - 1.0; else if (ea < 0.0) ea = ea; else ea = 0.0;
    checks += 2;
    if (fx2r(a_hat) != ea) begin failures++; $display("FAIL a_hat(%f) = %f, expected %f", th, fx2r(a_hat), ea); end
    if (fx2r(u_new) != fx2r(theta) - ea) begin failures++; $display("FAIL u(%f) = %f", th, fx2r(u_new)); end
  endtask

  initial begin
    one(-3.5); one(-1.0/65536.0); one(0.0); one(0.5); one(1.0); one(1.0 + 1.0/65536.0); one(7.25);
    for (int i = 0; i < 200; i++) one((real'($urandom_range(0, 80000)) - 40000.0) / 10000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
