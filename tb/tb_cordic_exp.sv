// tb_cordic_exp: e^-t over 0 .. 40 against $exp, with a tolerance of a few
// LSBs, and the 20-clock latency.
module tb_cordic_exp;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fix_t t = '0, y;
  int checks = 0, failures = 0;

  cordic_exp dut (.clk, .rst_n, .start, .t, .busy, .done, .y);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(fix_t tv);
    int lat;
    real ex;
    @(negedge clk); t = tv; start = 1; @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    ex = $exp(-fx2r(tv));
    checks += 2;
    if (rabs(fx2r(y) - ex) > 4.0 / 65536.0) begin failures++; $display("FAIL t=%f y=%f exp=%f", fx2r(tv), fx2r(y), ex); end
    if (lat != 20) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    one(0); one(FIX_ONE); one(fix_t'(45426)); one(fix_t'(40 << 16)); one(1);
    for (int i = 0; i < 200; i++) one(fix_t'($urandom_range(0, 12 << 16)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
