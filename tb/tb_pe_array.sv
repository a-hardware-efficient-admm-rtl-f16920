// tb_pe_array: drives the 32-lane PE array in MAC mode (per-lane accumulation
// with lane enables, then clear) and in adder-tree mode, and compares with
// products worked out in the testbench.
module tb_pe_array;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  localparam int LANES = 32;
  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic [LANES-1:0] lane_en;
  fix_t a [LANES];
  fix_t b [LANES];
  fix_t acc [LANES];
  fix_t tree_sum;
  longint expect_acc [LANES];
  int checks = 0, failures = 0;

  pe_array dut (.clk, .rst_n, .mode, .lane_en, .a, .b, .acc, .tree_sum);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint pm(fix_t x, fix_t y);
    return (longint'(x) * longint'(y)) >>> 16;
  endfunction

  initial begin
    mode = PE_IDLE; lane_en = '1;
    for (int k = 0; k < LANES; k++) begin a[k] = '0; b[k] = '0; expect_acc[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); mode = PE_CLR;
    @(negedge clk);
    // 10 MAC cycles with random data and random lane enables
    for (int c = 0; c < 10; c++) begin
      mode = PE_MAC;
      lane_en = {$urandom, $urandom} ;
      for (int k = 0; k < LANES; k++) begin
        a[k] = fix_t'(int'($urandom_range(0, 400000)) - 200000);
        b[k] = fix_t'(int'($urandom_range(0, 400000)) - 200000);
        if (lane_en[k]) expect_acc[k] += pm(a[k], b[k]);
      end
      @(negedge clk);
    end
    mode = PE_IDLE;
    @(negedge clk);
    for (int k = 0; k < LANES; k++) begin
      checks++;
      if (acc[k] !== fix_t'(expect_acc[k])) begin failures++; $display("FAIL lane %0d acc %0d exp %0d", k, acc[k], expect_acc[k]); end
    end
    // adder tree
    for (int c = 0; c < 20; c++) begin
      longint s = 0;
      lane_en = {$urandom, $urandom};
      for (int k = 0; k < LANES; k++) begin
        a[k] = fix_t'(int'($urandom_range(0, 400000)) - 200000);
        b[k] = fix_t'(int'($urandom_range(0, 400000)) - 200000);
      end
      #1;
      s = 0;
      for (int k = 0; k < LANES; k++) if (lane_en[k]) s += pm(a[k], b[k]);
      checks++;
      if (tree_sum !== fix_t'(s)) begin failures++; $display("FAIL tree %0d exp %0d", tree_sum, s); end
      @(negedge clk);
    end
    // idle keeps, clear clears
    for (int k = 0; k < LANES; k++) begin checks++; if (acc[k] !== fix_t'(expect_acc[k])) failures++; end
    mode = PE_CLR; @(negedge clk); mode = PE_IDLE;
    for (int k = 0; k < LANES; k++) begin checks++; if (acc[k] !== '0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
