// tb_inv_sqrt: checks y = d^-1/2 against floating point for random d over
// several decades (y must be the largest value with y^2 d <= 1, so it may be
// at most one LSB below the true value plus the rounding of d), the
// non-positive input flag and the FIX_W (32) clock latency.
module tb_inv_sqrt;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done, bad;
  fix_t d = '0, y;
  int checks = 0, failures = 0;

  inv_sqrt dut (.clk, .rst_n, .start, .d, .busy, .done, .bad, .y);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(fix_t dv);
    int lat;
    real ex, got;
    @(negedge clk); d = dv; start = 1; @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks += 2;
    if (dv <= 0) begin
      if (!bad || y != 0) begin failures++; $display("FAIL bad flag for %0d", dv); end
    end else begin
      ex = 1.0 / $sqrt(fx2r(dv));
      got = fx2r(y);
      if (bad || got > ex || ex - got > 2.0 / 65536.0 + 1e-6 * ex) begin
        failures++; $display("FAIL d=%f y=%f exp=%f", fx2r(dv), got, ex);
      end
      if (lat != 32) begin failures++; $display("FAIL latency %0d", lat); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    one(FIX_ONE); one(fix_t'(4 << 16)); one(fix_t'(256 << 16)); one(0); one(-5);
    for (int i = 0; i < 100; i++) one(fix_t'($urandom_range(64, 32'h3fffffff)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
