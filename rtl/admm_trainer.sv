// admm_trainer: hardware-efficient ADMM training of a linear SVM on the
// N x r feature matrix held in the training-data memory.
//
// The trainer runs the hardware-efficient form of the ADMM algorithm:
//   1  A = [lambda I + mu1 X^T X , mu1 X^T 1 ; mu1 1^T X , mu1 N]   (A = lambda I' + mu1 X~^T X~)
//   2  A = Q D Q^T                                 (shared Jacobi EVD unit)
//   3  Z = Y X~ Q D^-1/2, written over X~ in the same memory words
//   4  a^ = 0, u = 0
//   repeat
//   6    B  = u + mu1 1 - a^                       (cache I  <- B)
//   7    S  = Z^T B                                (register bank)
//   8    th = mu1 1 + u - mu1 Z S                  (cache II <- theta)
//   9    a^ = S_1(th)                              (cache I  <- a^)
//   10   u  = th - a^                              (cache II <- u)
//   until ||u(k+1) - u(k)||^2 <= EPS or MAX_ITER iterations
//   12 [beta ; beta0] = Q D^-1/2 S
// X~ = [X 1] is the sample matrix with a column of ones appended; the ones
// column is supplied by the trainer, so the stored element r of a row is
// ignored until step 3 overwrites the row with Z.
//
// Memory use follows the memory-sharing schedule of the paper: Z re-uses the
// words of X~, and the five N-vectors B, theta, a^, u share two caches,
// cache I holding a^ / B and cache II holding u / theta. S, only r+1 words, is
// kept in a register bank beside the PE array (the schedule of the paper places
// it in cache I, where step 9 would overwrite it before step 12 needs it). The
// stopping test needs u(k), which step 8 overwrites; the trainer therefore
// forms u(k+1) - u(k) = theta - S_1(theta) - u(k) already in step 8.
//
// Each pass over the N samples streams one sample per clock through the PE
// array: as MAC lanes (steps 1, 3, 7, 12) or as an adder tree (step 8).
// Cycle counts: step 1 D (N+2), step 3 N (D+2), the EVD as reported by the
// EVD unit, D (FIX_W) for D^-1/2, and 5N + 7 per ADMM iteration (five passes over the samples).
//
// Training-memory row format: element k (k < D) in bits [32k +: 32], label in
// bit 32D (1 = class +1, 0 = class -1).
//
// Kernel (Nystrom) mode, chosen by kernel_en with start, runs Algorithm 2 of
// the non-linear SVM before the steps above. Elements 0 .. R-1 of each row
// then hold raw features, and c = R landmarks are rows 0 .. R-1:
//   K1 copy the landmarks and their labels into a register bank;
//   K2 Psi_MM[m][m'] = y_m y_m' exp(-gamma ||x_m - x_m'||^2): the distance is
//      one adder-tree pass of the PE array, exp comes from cordic_exp
//      (20 clocks); the matrix is loaded into the shared EVD unit with a
//      decoupled 17th row;
//   K3 Psi_MM = Q D Q^T on the EVD unit, D^-1/2 on inv_sqrt (eigenvalues
//      below EIG_MIN give 0, a pseudo-inverse), W = Q D^-1/2 into a register
//      bank;
//   K4 for every row i: psi_i = y_i y_m k(x_i, x_m) for all m, v_i = psi_i W
//      (MAC lanes), x'_i = y_i v_i written over the raw row;
//   then steps 1 .. 12 on X' give [eta ; b], and alpha = W eta (MAC lanes).
// A kernel classification (kin_valid, idle, kernel model stored) computes
// sum_m alpha_m y_m k(x_m, x) + b with the same distance / exp sequence in
// R (kernel + 1) + 2 clocks; busy stays low during it.
// Kernel-mode cycles: K2 R^2 (22) + R, K4 N (R 22 + R + 4), roughly 96 000
// clocks at N = 256 before the linear run.
// The M subset of landmarks, the gamma port carrying -gamma of the paper's
// kernel (a positive number), the EIG_MIN pseudo-inverse and the register
// banks for W and the landmarks are this design's choices.
// Lint notes: busy flags and sweep count of the EVD, inverse-square-root and
// exp units, and inv_sqrt's `bad` flag, are not used: the controller waits on
// the done pulses, and a non-positive eigenvalue is handled by EIG_MIN.
module admm_trainer
  import svm_pkg::*;
#(
  parameter int unsigned N          = 256,   // training samples
  parameter int unsigned R          = 16,    // reduced rank r = features per sample
  parameter int unsigned PE_ROWS    = 4,
  parameter int unsigned PE_COLS    = 8,
  parameter int unsigned MAX_ITER   = 64,
  parameter int unsigned EPS        = 66,    // squared-norm threshold, ~1e-3 in Q15.16
  parameter int unsigned MAX_SWEEPS = 16,
  parameter int unsigned EIG_MIN    = 655,   // kernel eigenvalues below ~0.01 are dropped
  localparam int unsigned D      = R + 1,
  localparam int unsigned LANES  = PE_ROWS * PE_COLS,
  localparam int unsigned AW     = $clog2(N),
  localparam int unsigned ROW_W  = D * FIX_W + 1,
  localparam int unsigned EIW    = $clog2((D % 2 == 0) ? D : D + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // training-data memory
  output logic [AW-1:0]    tm_raddr,
  input  logic [ROW_W-1:0] tm_rdata,
  output logic             tm_we,
  output logic [AW-1:0]    tm_waddr,
  output logic [ROW_W-1:0] tm_wdata,
  // results
  output fix_t             beta [D],      // beta[0..R-1] weights, beta[R] bias
  output logic [15:0]      iterations,
  output logic             converged,
  output logic [31:0]      evd_rotations,
  output logic [31:0]      cycles,
  // kernel (Nystrom) mode
  input  logic             kernel_en,     // sampled with start: train an RBF-kernel model
  input  fix_t             gamma,         // k(x, x') = exp(-gamma ||x - x'||^2)
  output logic             kernel_model,  // the stored model is a kernel model
  output fix_t             alpha [R],     // dual weights of the R landmarks
  input  logic             kin_valid,     // classify kin_x with the kernel model
  input  fix_t             kin_x [R],
  output logic             kdec_valid,
  output logic             kdecision,
  output fix_t             kscore
);

  typedef enum logic [5:0] {
    S_IDLE, S_A_CLR, S_A_ROW, S_A_WR, S_EVD_GO, S_EVD_WAIT, S_ISQ_GO, S_ISQ_WAIT,
    S_Z_RD, S_Z_MAC, S_Z_WR, S_INIT, S_B, S_S_CLR, S_S, S_TH, S_AH, S_U, S_CHK,
    S_BETA_CLR, S_BETA, S_BETA_WR,
    K_LM_RD, K_LM_WR, K_ROW0, K_DIST, K_EXP, K_MM_WR, K_PAD, K_EVD_GO, K_EVD_WAIT,
    K_ISQ_GO, K_ISQ_WAIT, K_W, K_RD, K_RCAP, K_V_CLR, K_V_MAC, K_V_WR,
    K_AL_CLR, K_AL, K_AL_WR, K_INF_END
  } state_e;

  typedef enum logic [1:0] { C_MM, C_ROW, C_INF } kctx_e;

  state_e state;

  // ---------------- sub-units ----------------
  pe_mode_e        pe_mode;
  logic [LANES-1:0] lane_en;
  fix_t            pa [LANES];
  fix_t            pb [LANES];
  fix_t            acc [LANES];
  fix_t            tree_sum;

  pe_array #(.ROWS(PE_ROWS), .COLS(PE_COLS)) u_pe (
    .clk, .rst_n, .mode(pe_mode), .lane_en, .a(pa), .b(pb), .acc, .tree_sum
  );

  logic           evd_wr, evd_start, evd_busy, evd_done;
  logic [EIW-1:0] evd_row;
  fix_t           evd_wdata [D];
  fix_t           eig [D];
  fix_t           qv [D][D];
  logic [15:0]    evd_sweeps;

  jacobi_evd #(.DIM(D), .MAX_SWEEPS(MAX_SWEEPS)) u_evd (
    .clk, .rst_n, .wr_en(evd_wr), .wr_row(evd_row), .wr_data(evd_wdata),
    .start(evd_start), .busy(evd_busy), .done(evd_done), .sweeps(evd_sweeps),
    .rotations(evd_rotations), .eig, .q_out(qv)
  );

  logic isq_start, isq_busy, isq_done, isq_bad;
  fix_t isq_d, isq_y;

  inv_sqrt u_isq (
    .clk, .rst_n, .start(isq_start), .d(isq_d), .busy(isq_busy), .done(isq_done),
    .bad(isq_bad), .y(isq_y)
  );

  // two data caches (cache I: a^ / B, cache II: u / theta)
  logic [AW-1:0] c_raddr, c_waddr;
  logic          c1_we, c2_we;
  fix_t          c1_wdata, c2_wdata, c1_rdata, c2_rdata;

  ram_1r1w #(.WIDTH(FIX_W), .DEPTH(N)) u_cache1 (
    .clk, .raddr(c_raddr), .rdata(c1_rdata), .we(c1_we), .waddr(c_waddr), .wdata(c1_wdata)
  );
  ram_1r1w #(.WIDTH(FIX_W), .DEPTH(N)) u_cache2 (
    .clk, .raddr(c_raddr), .rdata(c2_rdata), .we(c2_we), .waddr(c_waddr), .wdata(c2_wdata)
  );

  fix_t th_in, ah_out, un_out;
  hinge_update u_hinge (.theta(th_in), .a_hat(ah_out), .u_new(un_out));

  logic exp_start, exp_busy, exp_done;
  fix_t exp_t, exp_y;

  cordic_exp u_exp (
    .clk, .rst_n, .start(exp_start), .t(exp_t), .busy(exp_busy), .done(exp_done), .y(exp_y)
  );

  // ---------------- registers ----------------
  logic [AW:0]    cnt;        // stream read counter
  logic           vld_d;      // read data valid
  logic [AW-1:0]  idx_d;      // index of the data now valid
  logic [AW-1:0]  row;        // row counter of step 3
  logic [EIW-1:0] j;          // column / inner counter
  fix_t           dis [D];    // D^-1/2
  fix_t           s_reg [D];  // S = Z^T B
  logic [63:0]    norm;       // ||u(k+1) - u(k)||^2

  // kernel-mode registers
  localparam int unsigned KW = $clog2(R);
  fix_t           lm [R][R];  // landmark bank (raw rows 0 .. R-1)
  logic [R-1:0]   lmy;        // landmark labels
  fix_t           wk [R][R];  // W = Q D^-1/2 of the landmark kernel matrix
  fix_t           disk [R];   // pseudo-inverse D^-1/2 of the kernel matrix
  fix_t           xr [R];     // vector under evaluation
  logic           yr;         // its label
  fix_t           psi [R];    // one row of Psi = y y' k
  logic [KW-1:0]  kc;         // landmark counter
  kctx_e          kctx;
  fix_t           kacc;       // kernel decision accumulator
  logic           kinf;       // a classification is running

  logic rd_go;
  assign rd_go = (cnt < (AW+1)'(N));

  function automatic fix_t elem(logic [ROW_W-1:0] r, int k);
    return fix_t'(r[k*FIX_W +: FIX_W]);
  endfunction

  // x~ element k of the row now on tm_rdata (column R is the constant 1)
  function automatic fix_t xt(logic [ROW_W-1:0] r, int k);
    return (k == int'(R)) ? FIX_ONE : elem(r, k);
  endfunction

  // ---------------- datapath muxing ----------------
  fix_t  theta_8, delta_8;
  fix_t  sel_x;

  always_comb begin
    pe_mode  = PE_IDLE;
    lane_en  = '0;
    for (int k = 0; k < int'(LANES); k++) begin pa[k] = '0; pb[k] = '0; end
    for (int k = 0; k < int'(D); k++) lane_en[k] = 1'b1;
    sel_x    = '0;
    tm_raddr = cnt[AW-1:0];
    tm_we    = 1'b0;
    tm_waddr = row;
    tm_wdata = '0;
    c_raddr  = cnt[AW-1:0];
    c_waddr  = idx_d;
    c1_we    = 1'b0;
    c2_we    = 1'b0;
    c1_wdata = '0;
    c2_wdata = '0;
    evd_wr   = 1'b0;
    evd_row  = j;
    evd_start = 1'b0;
    isq_start = 1'b0;
    isq_d     = eig[j];
    th_in     = '0;
    theta_8   = '0;
    delta_8   = '0;
    for (int k = 0; k < int'(D); k++) evd_wdata[k] = '0;
    exp_start = 1'b0;
    exp_t     = fmul(gamma, tree_sum);

    unique case (state)
      S_A_CLR, S_S_CLR, S_BETA_CLR: pe_mode = PE_CLR;
      S_A_ROW: begin                              // step 1, row j of X~^T X~
        for (int k = 0; k < int'(D); k++) if (int'(j) == k) sel_x = xt(tm_rdata, k);
        for (int k = 0; k < int'(D); k++) begin
          pa[k] = xt(tm_rdata, k);
          pb[k] = sel_x;
        end
        pe_mode = vld_d ? PE_MAC : PE_IDLE;
      end
      S_A_WR: begin
        evd_wr = 1'b1;
        for (int k = 0; k < int'(D); k++)
          evd_wdata[k] = fmul(FIX_MU1, acc[k]) +
                         (((k == int'(j)) && (k < int'(R))) ? FIX_LAMBDA : '0);
      end
      S_EVD_GO, K_EVD_GO: evd_start = 1'b1;
      S_ISQ_GO, K_ISQ_GO: isq_start = 1'b1;
      K_LM_RD, K_RD: tm_raddr = row;
      K_DIST: begin                               // ||xr - x_m||^2 on the adder tree
        for (int k = 0; k < int'(R); k++) begin
          pa[k] = xr[k] - lm[kc][k];
          pb[k] = xr[k] - lm[kc][k];
        end
        exp_start = 1'b1;
      end
      K_MM_WR: begin
        evd_wr  = 1'b1;
        evd_row = EIW'(row);
        for (int k = 0; k < int'(R); k++) evd_wdata[k] = psi[k];
      end
      K_PAD: begin                                // decoupled padding row
        evd_wr  = 1'b1;
        evd_row = EIW'(R);
        evd_wdata[R] = FIX_ONE;
      end
      K_V_CLR, K_AL_CLR: pe_mode = PE_CLR;
      K_V_MAC: begin                              // v_i = psi_i W
        for (int k = 0; k < int'(R); k++) begin
          pa[k] = wk[j[KW-1:0]][k];
          pb[k] = psi[j[KW-1:0]];
        end
        pe_mode = PE_MAC;
      end
      K_V_WR: begin                               // x'_i = y_i v_i, bias column 0
        tm_we = 1'b1;
        tm_wdata[ROW_W-1] = yr;
        for (int k = 0; k < int'(R); k++)
          tm_wdata[k*FIX_W +: FIX_W] = yr ? acc[k] : -acc[k];
      end
      K_AL: begin                                 // alpha = W eta
        for (int k = 0; k < int'(R); k++) begin
          pa[k] = wk[k][j[KW-1:0]];
          pb[k] = beta[j];
        end
        pe_mode = PE_MAC;
      end
      S_Z_RD: begin
        tm_raddr = row;
        pe_mode  = PE_CLR;
      end
      S_Z_MAC: begin                              // step 3: z_i = x~_i Q D^-1/2
        tm_raddr = row;
        for (int k = 0; k < int'(D); k++) if (int'(j) == k) sel_x = xt(tm_rdata, k);
        for (int k = 0; k < int'(D); k++) begin
          pa[k] = fmul(qv[j][k], dis[k]);
          pb[k] = sel_x;
        end
        pe_mode = PE_MAC;
      end
      S_Z_WR: begin
        tm_raddr = row;
        tm_we    = 1'b1;
        tm_wdata[ROW_W-1] = tm_rdata[ROW_W-1];
        for (int k = 0; k < int'(D); k++)
          tm_wdata[k*FIX_W +: FIX_W] = tm_rdata[ROW_W-1] ? acc[k] : -acc[k];
      end
      S_INIT: begin                               // step 4
        c_waddr  = cnt[AW-1:0];
        c1_we    = rd_go;
        c2_we    = rd_go;
      end
      S_B: begin                                  // step 6: B = u + mu1 - a^
        c1_we    = vld_d;
        c1_wdata = c2_rdata + FIX_MU1 - c1_rdata;
      end
      S_S: begin                                  // step 7: S = Z^T B
        for (int k = 0; k < int'(D); k++) begin
          pa[k] = elem(tm_rdata, k);
          pb[k] = c1_rdata;
        end
        pe_mode = vld_d ? PE_MAC : PE_IDLE;
      end
      S_TH: begin                                 // step 8: theta = mu1 + u - mu1 Z S
        for (int k = 0; k < int'(D); k++) begin
          pa[k] = elem(tm_rdata, k);
          pb[k] = s_reg[k];
        end
        theta_8  = FIX_MU1 + c2_rdata - fmul(FIX_MU1, tree_sum);
        th_in    = theta_8;
        delta_8  = un_out - c2_rdata;
        c2_we    = vld_d;
        c2_wdata = theta_8;
      end
      S_AH: begin                                 // step 9: a^ = S_1(theta)
        th_in    = c2_rdata;
        c1_we    = vld_d;
        c1_wdata = ah_out;
      end
      S_U: begin                                  // step 10: u = theta - a^
        c2_we    = vld_d;
        c2_wdata = c2_rdata - c1_rdata;
      end
      S_BETA: begin                               // step 12: beta~ = Q D^-1/2 S
        for (int k = 0; k < int'(D); k++) begin
          pa[k] = fmul(qv[k][j], dis[j]);
          pb[k] = s_reg[j];
        end
        pe_mode = PE_MAC;
      end
      default: ;
    endcase
  end

  // ---------------- control ----------------
  logic stream;
  assign stream = (state inside {S_A_ROW, S_INIT, S_B, S_S, S_TH, S_AH, S_U});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; cnt <= '0; vld_d <= 1'b0; idx_d <= '0;
      row <= '0; j <= '0; norm <= '0; iterations <= '0; converged <= 1'b0; cycles <= '0;
      for (int k = 0; k < int'(D); k++) begin
        dis[k] <= '0; s_reg[k] <= '0; beta[k] <= '0;
      end
      for (int m = 0; m < int'(R); m++) begin
        for (int k = 0; k < int'(R); k++) begin lm[m][k] <= '0; wk[m][k] <= '0; end
        disk[m] <= '0; xr[m] <= '0; psi[m] <= '0; alpha[m] <= '0;
      end
      lmy <= '0; yr <= 1'b0; kc <= '0; kctx <= C_MM; kacc <= '0; kinf <= 1'b0;
      kernel_model <= 1'b0; kdec_valid <= 1'b0; kdecision <= 1'b0; kscore <= '0;
    end else begin
      done <= 1'b0;
      kdec_valid <= 1'b0;
      if (state != S_IDLE && !kinf) cycles <= cycles + 1;
      if (stream) begin
        if (rd_go) cnt <= cnt + 1'b1;
        vld_d <= rd_go;
        idx_d <= cnt[AW-1:0];
      end
      if (state == S_TH && vld_d)
        norm <= norm + 64'(fmul(delta_8, delta_8));

      unique case (state)
        S_IDLE: if (start) begin
          j <= '0; row <= '0; cycles <= '0; converged <= 1'b0; iterations <= '0;
          kernel_model <= kernel_en;
          state <= kernel_en ? K_LM_RD : S_A_CLR;
        end else if (kin_valid && kernel_model) begin
          for (int k = 0; k < int'(R); k++) xr[k] <= kin_x[k];
          kacc <= '0; kc <= '0; kctx <= C_INF; kinf <= 1'b1; state <= K_DIST;
        end
        S_A_CLR: begin cnt <= '0; vld_d <= 1'b0; state <= S_A_ROW; end
        S_A_ROW: if (vld_d && idx_d == AW'(N - 1)) state <= S_A_WR;
        S_A_WR: begin
          if (int'(j) == int'(D) - 1) begin j <= '0; state <= S_EVD_GO; end
          else begin j <= j + 1'b1; state <= S_A_CLR; end
        end
        S_EVD_GO:   state <= S_EVD_WAIT;
        S_EVD_WAIT: if (evd_done) begin j <= '0; state <= S_ISQ_GO; end
        S_ISQ_GO:   state <= S_ISQ_WAIT;
        S_ISQ_WAIT: if (isq_done) begin
          dis[j] <= isq_y;
          if (int'(j) == int'(D) - 1) begin j <= '0; row <= '0; state <= S_Z_RD; end
          else begin j <= j + 1'b1; state <= S_ISQ_GO; end
        end
        S_Z_RD:  begin j <= '0; state <= S_Z_MAC; end
        S_Z_MAC: if (int'(j) == int'(D) - 1) state <= S_Z_WR; else j <= j + 1'b1;
        S_Z_WR: begin
          if (row == AW'(N - 1)) begin
            cnt <= '0; vld_d <= 1'b0; state <= S_INIT;
          end else begin
            row <= row + 1'b1; state <= S_Z_RD;
          end
        end
        S_INIT: if (!rd_go) begin cnt <= '0; vld_d <= 1'b0; state <= S_B; end
        S_B:  if (vld_d && idx_d == AW'(N - 1)) begin cnt <= '0; vld_d <= 1'b0; state <= S_S_CLR; end
        S_S_CLR: state <= S_S;
        S_S:  if (vld_d && idx_d == AW'(N - 1)) begin
          cnt <= '0; vld_d <= 1'b0; norm <= '0; state <= S_TH;
        end
        S_TH: begin
          if (state == S_TH && !vld_d && cnt == '0)
            for (int k = 0; k < int'(D); k++) s_reg[k] <= acc[k];
          if (vld_d && idx_d == AW'(N - 1)) begin cnt <= '0; vld_d <= 1'b0; state <= S_AH; end
        end
        S_AH: if (vld_d && idx_d == AW'(N - 1)) begin cnt <= '0; vld_d <= 1'b0; state <= S_U; end
        S_U:  if (vld_d && idx_d == AW'(N - 1)) begin cnt <= '0; vld_d <= 1'b0; state <= S_CHK; end
        S_CHK: begin
          iterations <= iterations + 1'b1;
          if (norm <= 64'(EPS)) begin
            converged <= 1'b1; state <= S_BETA_CLR;
          end else if (int'(iterations) + 1 >= int'(MAX_ITER)) state <= S_BETA_CLR;
          else state <= S_B;
        end
        S_BETA_CLR: begin j <= '0; state <= S_BETA; end
        S_BETA: if (int'(j) == int'(D) - 1) state <= S_BETA_WR; else j <= j + 1'b1;
        S_BETA_WR: begin
          for (int k = 0; k < int'(D); k++) beta[k] <= acc[k];
          if (kernel_model) state <= K_AL_CLR;
          else begin done <= 1'b1; state <= S_IDLE; end
        end
        // ---- kernel (Nystrom) mode ----
        K_LM_RD: state <= K_LM_WR;
        K_LM_WR: begin
          for (int k = 0; k < int'(R); k++) lm[row[KW-1:0]][k] <= elem(tm_rdata, k);
          lmy[row[KW-1:0]] <= tm_rdata[ROW_W-1];
          if (row == AW'(R - 1)) begin row <= '0; state <= K_ROW0; end
          else begin row <= row + 1'b1; state <= K_LM_RD; end
        end
        K_ROW0: begin
          for (int k = 0; k < int'(R); k++) xr[k] <= lm[row[KW-1:0]][k];
          yr <= lmy[row[KW-1:0]]; kc <= '0; kctx <= C_MM; state <= K_DIST;
        end
        K_DIST: state <= K_EXP;
        K_EXP: if (exp_done) begin
          if (kctx == C_INF) kacc <= kacc + fmul(alpha[kc], lmy[kc] ? exp_y : -exp_y);
          else psi[kc] <= (yr == lmy[kc]) ? exp_y : -exp_y;
          if (kc == KW'(R - 1)) begin
            unique case (kctx)
              C_MM:    state <= K_MM_WR;
              C_ROW:   state <= K_V_CLR;
              default: state <= K_INF_END;
            endcase
          end else begin
            kc <= kc + 1'b1; state <= K_DIST;
          end
        end
        K_MM_WR: if (row == AW'(R - 1)) state <= K_PAD;
                 else begin row <= row + 1'b1; state <= K_ROW0; end
        K_PAD: state <= K_EVD_GO;
        K_EVD_GO: state <= K_EVD_WAIT;
        K_EVD_WAIT: if (evd_done) begin j <= '0; state <= K_ISQ_GO; end
        K_ISQ_GO: state <= K_ISQ_WAIT;
        K_ISQ_WAIT: if (isq_done) begin
          disk[j[KW-1:0]] <= (eig[j] < fix_t'(EIG_MIN)) ? '0 : isq_y;
          if (int'(j) == int'(R) - 1) begin j <= '0; state <= K_W; end
          else begin j <= j + 1'b1; state <= K_ISQ_GO; end
        end
        K_W: begin
          for (int k = 0; k < int'(R); k++) wk[j[KW-1:0]][k] <= fmul(qv[j][k], disk[k]);
          if (int'(j) == int'(R) - 1) begin j <= '0; row <= '0; state <= K_RD; end
          else j <= j + 1'b1;
        end
        K_RD: state <= K_RCAP;
        K_RCAP: begin
          for (int k = 0; k < int'(R); k++) xr[k] <= elem(tm_rdata, k);
          yr <= tm_rdata[ROW_W-1]; kc <= '0; kctx <= C_ROW; state <= K_DIST;
        end
        K_V_CLR: begin j <= '0; state <= K_V_MAC; end
        K_V_MAC: if (int'(j) == int'(R) - 1) state <= K_V_WR; else j <= j + 1'b1;
        K_V_WR: begin
          j <= '0;
          if (row == AW'(N - 1)) state <= S_A_CLR;
          else begin row <= row + 1'b1; state <= K_RD; end
        end
        K_AL_CLR: begin j <= '0; state <= K_AL; end
        K_AL: if (int'(j) == int'(R) - 1) state <= K_AL_WR; else j <= j + 1'b1;
        K_AL_WR: begin
          for (int k = 0; k < int'(R); k++) alpha[k] <= acc[k];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        K_INF_END: begin
          kscore     <= kacc + beta[R];
          kdecision  <= (kacc + beta[R]) >= 0;
          kdec_valid <= 1'b1;
          kinf       <= 1'b0;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) && !kinf;

  // Accumulated rows must fit the PE array.
  initial assert (D <= LANES) else $error("rank + 1 exceeds the PE lanes");

endmodule
