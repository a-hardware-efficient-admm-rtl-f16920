// tb_jacobi_evd: decomposes random symmetric 17 x 17 matrices and checks the
// result as an eigen-decomposition: Q^T Q = I, Q diag(eig) Q^T = A, and the
// remaining off-diagonal elements are small. A second case loads a 16 x 16
// matrix padded with a decoupled 17th row, as the Nystrom step would, and
// checks that the padding stays untouched. Also checks that rotations happen
// in parallel (more rotations than rounds) and that the unit stops.
module tb_jacobi_evd;
  import svm_pkg::*;
  import svm_ref_pkg::*;

  localparam int DIM = 17;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0;
  logic [4:0] wr_row;
  fix_t wr_data [DIM];
  logic busy, done;
  logic [15:0] sweeps;
  logic [31:0] rotations;
  fix_t eig [DIM];
  fix_t q_out [DIM][DIM];
  int checks = 0, failures = 0;
  real am [DIM][DIM];

  jacobi_evd #(.DIM(DIM)) dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .start, .busy, .done,
                               .sweeps, .rotations, .eig, .q_out);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic run_case(int active, real scale);
    int cyc;
    real e_orth, e_rec, e_off, s;
    for (int i = 0; i < DIM; i++)
      for (int j = i; j < DIM; j++) begin
        if (i < active && j < active)
          am[i][j] = fx2r(r2fx(scale * (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0));
        else am[i][j] = (i == j) ? 1.0 : 0.0;
        am[j][i] = am[i][j];
      end
    for (int i = 0; i < DIM; i++) begin
      @(negedge clk); wr_en = 1; wr_row = 5'(i);
      for (int j = 0; j < DIM; j++) wr_data[j] = r2fx(am[i][j]);
    end
    @(negedge clk); wr_en = 0; start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    e_orth = 0; e_rec = 0; e_off = 0;
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        s = 0; for (int k = 0; k < DIM; k++) s += fx2r(q_out[k][i]) * fx2r(q_out[k][j]);
        s = s - ((i == j) ? 1.0 : 0.0);
        if (rabs(s) > e_orth) e_orth = rabs(s);
        s = 0; for (int k = 0; k < DIM; k++) s += fx2r(q_out[i][k]) * fx2r(eig[k]) * fx2r(q_out[j][k]);
        if (rabs(s - am[i][j]) > e_rec) e_rec = rabs(s - am[i][j]);
        if (i != j && rabs(fx2r(dut.a[i][j])) > e_off) e_off = rabs(fx2r(dut.a[i][j]));
      end
    $display("active=%0d scale=%f sweeps=%0d rotations=%0d cycles=%0d orth=%g rec=%g off=%g",
             active, scale, sweeps, rotations, cyc, e_orth, e_rec, e_off);
    chk(e_orth < 2e-3, "Q not orthonormal");
    chk(e_rec < 2e-3 * scale * DIM, "Q D Q^T differs from A");
    chk(e_off < 1e-3 * scale * DIM, "off-diagonal not reduced");
    chk(rotations > 32'(cyc), "no parallel rotations");
    chk(cyc == int'(sweeps) * 17, "cycle count is not 17 per sweep");
    if (active < DIM) begin
      chk(eig[DIM-1] == FIX_ONE, "padding eigenvalue changed");
      for (int i = 0; i < DIM - 1; i++) chk(q_out[i][DIM-1] == 0 && q_out[DIM-1][i] == 0, "padding vector mixed");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_case(17, 4.0);
    run_case(17, 40.0);
    run_case(16, 2.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
