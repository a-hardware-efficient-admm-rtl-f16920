// tb_svm_processor: end-to-end test of the SVM processor at its default size
// (256 training vectors of rank 16, 4 x 8 PE array).
//
// Three trainings are run: a well separated set, a heavily overlapping one
// and one whose labels are pure noise (which does not converge in 64
// iterations).
// For each, the trained model is compared with the floating-point textbook
// ADMM iteration run for the same number of iterations, and fresh vectors
// are classified through the decision block; each decision is compared with
// the sign of the score worked out from the trained model in the testbench.
// A training-memory write issued while training is running must be dropped.
// The testbench counts each mechanism of the design and fails if one never
// happened: parallel Jacobi rotations, both stop rules (convergence and
// iteration limit), all three regions of the hinge shrinkage, a dropped load,
// and decisions for both classes. A fourth training uses the kernel
// (Nystrom) mode on raw features with a disc-shaped class boundary; its dual
// weights, bias and kernel scores are compared with the Nystrom reference.
module tb_svm_processor;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  localparam int N = 256, R = 16, D = R + 1, AW = 8;

  logic clk = 0, rst_n = 0;
  logic ld_en = 0, ld_label = 0;
  logic [AW-1:0] ld_addr = '0;
  fix_t ld_x [R];
  logic [15:0] ld_dropped, iterations;
  logic train_start = 0, train_busy, train_done, converged;
  logic [31:0] evd_rotations, train_cycles;
  fix_t beta [D];
  logic feat_valid = 0, feat_last = 0, dec_valid, decision;
  fix_t feat_data = '0, score;
  logic train_kernel = 0, kernel_model, kin_valid = 0, kdec_valid, kdecision;
  fix_t gamma = '0, kscore;
  fix_t alpha [R];
  fix_t kin_x [R];

  svm_processor dut (
    .clk, .rst_n, .ld_en, .ld_addr, .ld_label, .ld_x, .ld_dropped,
    .train_start, .train_busy, .train_done, .iterations, .converged, .evd_rotations,
    .train_cycles, .beta, .feat_valid, .feat_data, .feat_last, .dec_valid, .decision, .score,
    .train_kernel, .gamma, .kernel_model, .alpha, .kin_valid, .kin_x, .kdec_valid,
    .kdecision, .kscore
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_conv = 0, n_limit = 0, n_rot = 0, n_drop = 0, n_neg = 0, n_zero = 0, n_pos = 0;
  int n_dec1 = 0, n_dec0 = 0, n_kern = 0, n_kdec1 = 0, n_kdec0 = 0;

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // hinge-shrinkage regions seen in step 9
  always @(posedge clk)
    if (dut.u_trainer.c1_we && int'(dut.u_trainer.state) == 16) begin
      if (dut.u_trainer.th_in < 0) n_neg++;
      else if (dut.u_trainer.th_in > FIX_ONE) n_pos++;
      else n_zero++;
    end

  real x[][];
  int  y[];

  function automatic real draw(int lab, int k, real sep, real noise);
    real centre;
    centre = lab * sep * ((k % 3 == 0) ? 1.0 : ((k % 3 == 1) ? -0.6 : 0.3));
    return fx2r(r2fx(centre + noise * (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0));
  endfunction

  task automatic train_and_check(real sep, real noise, string name);
    rvec_t ref_beta;
    real err;
    int correct;
    x = new[N]; y = new[N];
    for (int i = 0; i < N; i++) begin
      x[i] = new[R];
      y[i] = ($urandom_range(0, 1) == 1) ? 1 : -1;
      for (int k = 0; k < R; k++) x[i][k] = draw(y[i], k, sep, noise);
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = AW'(i); ld_label = (y[i] == 1);
      for (int k = 0; k < R; k++) ld_x[k] = r2fx(x[i][k]);
    end
    @(negedge clk); ld_en = 0; train_start = 1;
    @(negedge clk); train_start = 0;
    // a write while training must be dropped
    repeat (50) @(negedge clk);
    ld_en = 1; ld_addr = 0; ld_label = 0; for (int k = 0; k < R; k++) ld_x[k] = r2fx(3.0);
    @(negedge clk); ld_en = 0;
    while (!train_done) @(negedge clk);
    if (converged) n_conv++; else n_limit++;
    n_rot += int'(evd_rotations > 0);
    ref_beta = admm_linear(x, y, int'(iterations), 10.0, 1.0);
    err = 0.0;
    for (int k = 0; k < D; k++) begin
      real e;
      e = rabs(fx2r(beta[k]) - ref_beta[k]);
      if (e > err) err = e;
      chk(e <= 0.025 + 0.05 * rabs(ref_beta[k]),
          $sformatf("%s beta[%0d] = %f, reference %f", name, k, fx2r(beta[k]), ref_beta[k]));
    end
    $display("%s: iterations=%0d converged=%0d rotations=%0d cycles=%0d max|beta-ref|=%g",
             name, iterations, converged, evd_rotations, train_cycles, err);
    // classify fresh vectors
    correct = 0;
    for (int v = 0; v < 40; v++) begin
      int lab;
      fix_t f [R];
      longint s;
      lab = (v % 2 == 0) ? 1 : -1;
      s = longint'(beta[R]);
      for (int k = 0; k < R; k++) begin
        f[k] = r2fx(draw(lab, k, sep, noise));
        s += (longint'(f[k]) * longint'(beta[k])) >>> 16;
      end
      for (int k = 0; k < R; k++) begin
        @(negedge clk); feat_valid = 1; feat_data = f[k]; feat_last = (k == R - 1);
      end
      @(negedge clk); feat_valid = 0; feat_last = 0;
      chk(dec_valid, "no decision");
      chk(score == fix_t'(s), $sformatf("score %0d, expected %0d", score, s));
      chk(decision == (s >= 0), "decision is not the sign of the score");
      if (decision) n_dec1++; else n_dec0++;
      if ((decision ? 1 : -1) == lab) correct++;
    end
    $display("%s: %0d of 40 fresh vectors classified correctly", name, correct);
    if (sep >= 0.3) chk(correct >= 36, $sformatf("%s accuracy %0d/40", name, correct));
  endtask

  // Kernel mode: raw features 0 and 1 uniform in [-2, 2], the others small
  // noise in [-0.25, 0.25]; label +1 inside a disc in the first two features (not linearly separable). The model (alpha, b) and
  // the kernel scores of fresh vectors are compared with nystrom_kernel().
  function automatic real kfeat(int k);
    real u;
    u = real'($urandom_range(0, 10000)) / 10000.0 - 0.5;
    return (k < 2) ? 4.0 * u : 0.5 * u;
  endfunction

  task automatic kernel_train_and_check();
    rvec_t ref_m;
    real g, e, sref, kv;
    int correct;
    g = 0.5;
    gamma = r2fx(g);
    x = new[N]; y = new[N];
    for (int i = 0; i < N; i++) begin
      x[i] = new[R];
      for (int k = 0; k < R; k++) x[i][k] = fx2r(r2fx(kfeat(k)));
      y[i] = (x[i][0] * x[i][0] + x[i][1] * x[i][1] < 2.5) ? 1 : -1;
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = AW'(i); ld_label = (y[i] == 1);
      for (int k = 0; k < R; k++) ld_x[k] = r2fx(x[i][k]);
    end
    @(negedge clk); ld_en = 0; train_start = 1; train_kernel = 1;
    @(negedge clk); train_start = 0; train_kernel = 0;
    while (!train_done) @(negedge clk);
    chk(kernel_model, "kernel model flag not set");
    n_kern += int'(kernel_model);
    if (converged) n_conv++; else n_limit++;
    ref_m = nystrom_kernel(x, y, R, g, int'(iterations), 10.0, 1.0);
    for (int m = 0; m <= R; m++) begin
      real hw;
      hw = (m < R) ? fx2r(alpha[m]) : fx2r(beta[R]);
      chk(rabs(hw - ref_m[m]) <= 0.03 + 0.05 * rabs(ref_m[m]),
          $sformatf("kernel coefficient %0d = %f, reference %f", m, hw, ref_m[m]));
    end
    $display("kernel: iterations=%0d converged=%0d cycles=%0d", iterations, converged, train_cycles);
    correct = 0;
    for (int v = 0; v < 40; v++) begin
      real xv[];
      int lab;
      xv = new[R];
      for (int k = 0; k < R; k++) begin
        kin_x[k] = r2fx(kfeat(k));
        xv[k] = fx2r(kin_x[k]);
      end
      if (v < 10) begin kin_x[0] = r2fx(0.1 * v); kin_x[1] = '0; xv[0] = fx2r(kin_x[0]); xv[1] = 0.0; end
      lab = (xv[0] * xv[0] + xv[1] * xv[1] < 2.5) ? 1 : -1;
      sref = ref_m[R];
      for (int m = 0; m < R; m++) begin
        kv = rbf(x[m], xv, g);
        sref += ref_m[m] * y[m] * kv;
      end
      @(negedge clk); kin_valid = 1;
      @(negedge clk); kin_valid = 0;
      while (!kdec_valid) @(negedge clk);
      e = rabs(fx2r(kscore) - sref);
      chk(e <= 0.03 + 0.05 * rabs(sref), $sformatf("kernel score %f, reference %f", fx2r(kscore), sref));
      chk(kdecision == (kscore >= 0), "kernel decision is not the sign of the score");
      if (kdecision) n_kdec1++; else n_kdec0++;
      if ((kdecision ? 1 : -1) == lab) correct++;
    end
    $display("kernel: %0d of 40 fresh vectors classified correctly", correct);
    chk(correct >= 30, $sformatf("kernel accuracy %0d/40", correct));
  endtask

  initial begin
    for (int k = 0; k < R; k++) begin ld_x[k] = '0; kin_x[k] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    train_and_check(0.5, 0.5, "separated");
    train_and_check(0.05, 1.0, "overlapping");
    train_and_check(0.0, 12.0, "label noise");
    kernel_train_and_check();
    n_drop = int'(ld_dropped);
    chk(ld_dropped == 16'd3, $sformatf("dropped loads %0d, expected 3", ld_dropped));
    $display("mechanisms: rot=%0d conv=%0d limit=%0d drop=%0d hinge neg/zero/pos=%0d/%0d/%0d dec1/0=%0d/%0d kernel=%0d kdec1/0=%0d/%0d",
             n_rot, n_conv, n_limit, n_drop, n_neg, n_zero, n_pos, n_dec1, n_dec0,
             n_kern, n_kdec1, n_kdec0);
    chk(n_rot > 0, "no Jacobi rotation");
    chk(n_conv > 0, "no training stopped on convergence");
    chk(n_limit > 0, "no training stopped at the iteration limit");
    chk(n_drop > 0, "no load dropped");
    chk(n_neg > 0 && n_zero > 0 && n_pos > 0, "a hinge region never used");
    chk(n_dec1 > 0 && n_dec0 > 0, "decisions of one class only");
    chk(n_kern > 0, "no kernel model trained");
    chk(n_kdec1 > 0 && n_kdec0 > 0, "kernel decisions of one class only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
