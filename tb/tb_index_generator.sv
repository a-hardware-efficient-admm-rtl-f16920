// tb_index_generator: for an odd (17) and an even (16) size, checks that every
// round holds disjoint in-range pairs with p < q and that one sweep covers
// every off-diagonal pair exactly once, and that the round counter wraps.
module tb_index_generator;
  logic clk = 0, rst_n = 0, restart = 0, advance = 0;
  int checks = 0, failures = 0;

  logic [4:0] p17 [9];  logic [4:0] q17 [9];  logic v17 [9];  logic [4:0] r17; logic l17;
  logic [3:0] p16 [8];  logic [3:0] q16 [8];  logic v16 [8];  logic [3:0] r16; logic l16;

  index_generator #(.DIM(17)) g17 (.clk, .rst_n, .restart, .advance, .p(p17), .q(q17),
                                   .pair_valid(v17), .round(r17), .last_round(l17));
  index_generator #(.DIM(16)) g16 (.clk, .rst_n, .restart, .advance, .p(p16), .q(q16),
                                   .pair_valid(v16), .round(r16), .last_round(l16));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen17 [17][17];
  int seen16 [16][16];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    foreach (seen17[i, j]) seen17[i][j] = 0;
    foreach (seen16[i, j]) seen16[i][j] = 0;
    for (int r = 0; r < 17; r++) begin
      int used17 [18];
      int used16 [16];
      foreach (used17[i]) used17[i] = 0;
      foreach (used16[i]) used16[i] = 0;
      for (int k = 0; k < 9; k++) if (v17[k]) begin
        chk(p17[k] < q17[k] && q17[k] < 17, "17: pair order / range");
        used17[p17[k]]++; used17[q17[k]]++;
        seen17[p17[k]][q17[k]]++;
      end
      foreach (used17[i]) chk(used17[i] <= 1, $sformatf("17: index %0d used twice in round %0d", i, r));
      if (r < 15) begin
        for (int k = 0; k < 8; k++) begin
          chk(v16[k] && p16[k] < q16[k], "16: pair order");
          used16[p16[k]]++; used16[q16[k]]++;
          seen16[p16[k]][q16[k]]++;
        end
        foreach (used16[i]) chk(used16[i] == 1, "16: index not used exactly once");
      end
      chk(l17 == (r == 16), "17: last_round");
      if (r < 15) chk(l16 == (r == 14), "16: last_round");
      if (r == 14) begin
        // g16 wraps here; stop counting it
      end
      @(negedge clk); advance = 1; @(negedge clk); advance = 0;
    end
    chk(r17 == 0, "17: round wraps to 0");
    for (int i = 0; i < 17; i++) for (int j = i + 1; j < 17; j++)
      chk(seen17[i][j] == 1, $sformatf("17: pair (%0d,%0d) seen %0d times", i, j, seen17[i][j]));
    for (int i = 0; i < 16; i++) for (int j = i + 1; j < 16; j++)
      chk(seen16[i][j] == 1, $sformatf("16: pair (%0d,%0d) seen %0d times", i, j, seen16[i][j]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
