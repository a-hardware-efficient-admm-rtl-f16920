// tb_ram_1r1w: random reads and writes against an associative-array model;
// checks the one-clock read latency and read-old-data on a same-address
// read/write.
module tb_ram_1r1w;
  localparam int W = 32, DEP = 256;
  logic clk = 0, we = 0;
  logic [7:0] raddr = 0, waddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [DEP];
  int checks = 0, failures = 0;

  ram_1r1w #(.WIDTH(W), .DEPTH(DEP)) dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    for (int i = 0; i < DEP; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      raddr = 8'($urandom); we = $urandom_range(0, 1) == 1;
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 8'($urandom);
      wdata = $urandom;
      expect_q = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== expect_q) begin failures++; $display("FAIL read %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
