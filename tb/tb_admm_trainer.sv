// tb_admm_trainer: runs the ADMM trainer on a small random two-class set and
// compares the trained model with the floating-point textbook ADMM iteration
// (svm_ref_pkg::admm_linear) run for the same number of iterations. Also
// checks the iteration limit, the EVD activity and the cycle count of one
// ADMM iteration (5N + 7 clocks: five passes over the N samples).
// A second run uses the kernel (Nystrom) mode with two identical landmark
// rows, so the landmark kernel matrix is singular: exactly one eigenvalue
// must be dropped by the pseudo-inverse, and kernel classifications of
// training vectors must match the score recomputed in the testbench from the
// trained alpha and b.
module tb_admm_trainer;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  localparam int N = 32, R = 4, D = R + 1, AW = $clog2(N), ROW_W = D * 32 + 1;
  localparam int MAX_ITER = 12;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, converged;
  logic [AW-1:0] raddr, waddr;
  logic [ROW_W-1:0] rdata, wdata;
  logic we;
  fix_t beta [D];
  logic [15:0] iterations;
  logic [31:0] rots, cycles;

  int checks = 0, failures = 0;
  logic kernel_en = 0, kernel_model, kin_valid = 0, kdec_valid, kdecision;
  fix_t gamma = 32'sd32768, kscore;     // gamma = 0.5
  fix_t alpha [R];
  fix_t kin_x [R];

  admm_trainer #(.N(N), .R(R), .MAX_ITER(MAX_ITER), .EPS(0)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .tm_raddr(raddr), .tm_rdata(rdata), .tm_we(we), .tm_waddr(waddr), .tm_wdata(wdata),
    .beta(beta), .iterations(iterations), .converged(converged), .evd_rotations(rots), .cycles(cycles),
    .kernel_en, .gamma, .kernel_model, .alpha, .kin_valid, .kin_x, .kdec_valid, .kdecision, .kscore
  );

  // training-data memory model
  logic [ROW_W-1:0] mem [N];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real x[][];
  int  y[];
  rvec_t ref_beta;
  int iter_start, iter_cycles;

  initial begin
    x = new[N]; y = new[N];
    for (int i = 0; i < N; i++) begin
      x[i] = new[R];
      y[i] = (i % 2 == 0) ? 1 : -1;
      for (int k = 0; k < R; k++) begin
        int q;
        real centre;
        q = int'($urandom_range(0, 256)) - 128;                      // noise, /256
        centre = y[i] * ((k % 2 == 0) ? 0.4 : -0.25);
        x[i][k] = real'($rtoi(centre * 256.0) + q) / 256.0;
      end
      mem[i] = '0;
      mem[i][ROW_W-1] = (y[i] == 1);
      for (int k = 0; k < R; k++) mem[i][k*32 +: 32] = r2fx(x[i][k]);
      mem[i][R*32 +: 32] = 32'($urandom);   // must be ignored (ones column)
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    // time one ADMM iteration: from entering step 6 to entering it again
    wait (int'(dut.state) == 12); iter_start = int'(cycles);
    wait (int'(dut.state) == 13);
    wait (int'(dut.state) == 12); iter_cycles = int'(cycles) - iter_start;
    wait (done);
    @(posedge clk);
    ref_beta = admm_linear(x, y, int'(iterations), 10.0, 1.0);
    check(iterations == 16'(MAX_ITER), $sformatf("iterations %0d, expected %0d", iterations, MAX_ITER));
    check(!converged, "converged flag with EPS = 0");
    check(rots > 0, "EVD performed no rotation");
    check(iter_cycles == 5 * N + 7, $sformatf("iteration took %0d cycles, expected %0d", iter_cycles, 5 * N + 7));
    for (int k = 0; k < D; k++) begin
      real b;
      b = fx2r(beta[k]);
      $display("beta[%0d] dut=%f ref=%f", k, b, ref_beta[k]);
      check(rabs(b - ref_beta[k]) <= 0.01 + 0.03 * rabs(ref_beta[k]),
            $sformatf("beta[%0d] = %f, reference %f", k, b, ref_beta[k]));
    end
    // Z must have replaced X~ in the training memory: row 0, element R is
    // y_0 * (Q D^-1/2)[R][*] ... check only that the ones column is gone
    // and the label bits are preserved.
    for (int i = 0; i < N; i++) check(mem[i][ROW_W-1] == (y[i] == 1), "label bit lost");
    $display("cycles=%0d rotations=%0d", cycles, rots);
    check(!kernel_model, "kernel flag after a linear run");

    // ---- kernel mode, singular landmark matrix ----
    x[1] = x[0]; y[1] = y[0];
    for (int i = 0; i < N; i++) begin
      mem[i] = '0;
      mem[i][ROW_W-1] = (y[i] == 1);
      for (int k = 0; k < R; k++) mem[i][k*32 +: 32] = r2fx(x[i][k]);
    end
    @(posedge clk); start <= 1; kernel_en <= 1; @(posedge clk); start <= 0; kernel_en <= 0;
    wait (done);
    @(posedge clk);
    check(kernel_model, "kernel flag not set");
    begin
      int zeros;
      zeros = 0;
      for (int m = 0; m < R; m++) zeros += int'(dut.disk[m] == 0);
      check(zeros == 1, $sformatf("%0d kernel eigenvalues dropped, expected 1", zeros));
    end
    for (int i = 0; i < N; i++) check(mem[i][ROW_W-1] == (y[i] == 1), "label bit lost (kernel)");
    for (int v = 0; v < 8; v++) begin
      real xv[], sc, d2;
      xv = new[R];
      for (int k = 0; k < R; k++) begin kin_x[k] = r2fx(x[v + 4][k]); xv[k] = x[v + 4][k]; end
      sc = fx2r(beta[R]);
      for (int m = 0; m < R; m++) begin
        d2 = 0.0;
        for (int k = 0; k < R; k++) d2 += (x[m][k] - xv[k]) * (x[m][k] - xv[k]);
        sc += fx2r(alpha[m]) * y[m] * $exp(-0.5 * d2);
      end
      @(posedge clk); kin_valid <= 1; @(posedge clk); kin_valid <= 0;
      wait (kdec_valid);
      @(negedge clk);
      check(rabs(fx2r(kscore) - sc) <= 0.002, $sformatf("kernel score %f, expected %f", fx2r(kscore), sc));
      check(kdecision == (kscore >= 0), "kernel decision is not the sign of the score");
      @(posedge clk);
    end
    $display("kernel run: iterations=%0d cycles=%0d", iterations, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
