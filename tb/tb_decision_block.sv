// tb_decision_block: streams random feature vectors through the decision
// block and compares score and class with a fixed-point dot product worked
// out in the testbench; checks the one-clock output latency.
module tb_decision_block;
  import svm_pkg::*;

  localparam int R = 16, D = R + 1;
  logic clk = 0, rst_n = 0;
  fix_t beta [D];
  logic in_valid = 0, in_last = 0, out_valid, decision;
  fix_t in_data, score;
  int checks = 0, failures = 0, pos = 0, neg = 0;

  decision_block #(.R(R)) dut (.clk, .rst_n, .beta, .in_valid, .in_data, .in_last,
                               .out_valid, .decision, .score);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fix_t x [R];
    int expect_score;
    in_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = 0; v < 60; v++) begin
      for (int k = 0; k < D; k++) beta[k] = fix_t'(int'($urandom_range(0, 131072)) - 65536);
      expect_score = int'(beta[R]);
      for (int k = 0; k < R; k++) begin
        x[k] = fix_t'(int'($urandom_range(0, 131072)) - 65536);
        expect_score += int'((longint'(x[k]) * longint'(beta[k])) >>> 16);
      end
      for (int k = 0; k < R; k++) begin
        @(negedge clk);
        in_valid = 1; in_data = x[k]; in_last = (k == R - 1);
        checks++;
        if (out_valid) begin failures++; $display("FAIL early out_valid"); end
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      if (score !== fix_t'(expect_score)) begin failures++; $display("FAIL score %0d exp %0d", score, expect_score); end
      if (decision !== (expect_score >= 0)) begin failures++; $display("FAIL decision"); end
      if (decision) pos++; else neg++;
      @(negedge clk);
    end
    checks++;
    if (pos == 0 || neg == 0) begin failures++; $display("FAIL only one class seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
