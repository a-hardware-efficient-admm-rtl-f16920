// jacobi_evd: eigenvalue decomposition A = Q D Q^T of a symmetric matrix by
// approximate Jacobi rotations applied to disjoint index pairs in parallel.
//
// The same unit serves both uses the training flow has for an EVD: the
// Nystrom decomposition of the sampled kernel matrix and the inversion of the
// ADMM system matrix (A^-1 = Q D^-1 Q^T), which is why it is sized for the
// larger of the two (DIM = rank + 1 = 17). A smaller matrix is decomposed by
// loading it with zero off-diagonal padding rows; padded rows are never rotated.
//
// How it works. Every clock the index generator supplies one round of DIM/2
// disjoint pairs (p, q). For each pair the rotation is an "approximate"
// Jacobi rotation: its tangent is restricted to t = +-2^-l, l = 0 .. L-1, so a
// rotation is a shift-and-add followed by a constant scaling
// c_l = (1 + 4^-l)^-1/2 that keeps it orthonormal. All 2L candidate tangents
// are evaluated in the same cycle on the residual off-diagonal element
//   r(t) = t (a_pp - a_qq) + a_pq (1 - t^2),
// and the one with the smallest |r| is taken if it is smaller than |a_pq|
// (otherwise the pair is left alone), so each rotation strictly lowers the
// off-diagonal energy. Rows, then columns of A, and the columns of Q, are
// rotated in one clock, one round per clock. A sweep is M-1 rounds
// (M = DIM rounded up to even). The unit stops after a sweep without any
// rotation, or after MAX_SWEEPS sweeps.
//
// The use of approximate Jacobi rotations, one-cycle angle selection and
// parallel rotation of disjoint pairs follows the paper; the candidate search
// used to pick the angle, the stop rule and MAX_SWEEPS are this design's.
//
// Interface: while idle, `wr_en` writes row `wr_row` of A. `start` (one clock)
// sets Q = I and begins; `busy` is high while rotating; `done` pulses for one
// clock at the end. `eig[k]` is the k-th diagonal element (eigenvalue, not
// sorted) and `q_out[i][k]` the i-th element of the matching eigenvector.
module jacobi_evd
  import svm_pkg::*;
#(
  parameter int unsigned DIM        = 17,
  parameter int unsigned L          = 16,
  parameter int unsigned MAX_SWEEPS = 16,
  parameter int unsigned TOL        = 2,
  localparam int unsigned M     = (DIM % 2 == 0) ? DIM : DIM + 1,
  localparam int unsigned PAIRS = M / 2,
  localparam int unsigned IW    = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_row,
  input  fix_t          wr_data [DIM],
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [15:0]   sweeps,
  output logic [31:0]   rotations,
  output fix_t          eig [DIM],
  output fix_t          q_out [DIM][DIM]
);

  // c_l = (1 + 4^-l)^-1/2 with CF fractional bits, rounded to nearest:
  // bisection for the largest c with c^2 (4^l + 1) <= 2^(2 CF) 4^l, then
  // c + 1 if (2c + 1)^2 (4^l + 1) <= 2^(2 CF + 2) 4^l.
  localparam int unsigned CF = 24;

  function automatic logic [L-1:0][31:0] make_ctab();
    logic [L-1:0][31:0] tab;
    logic [127:0] c, tr, lhs, rhs;
    for (int l = 0; l < int'(L); l++) begin
      c = '0;
      for (int bt = CF; bt >= 0; bt--) begin
        tr  = c | (128'd1 << bt);
        lhs = tr * tr * ((128'd1 << (2 * l)) + 128'd1);
        rhs = (128'd1 << (2 * CF)) << (2 * l);
        if (lhs <= rhs) c = tr;
      end
      lhs = (2 * c + 1) * (2 * c + 1) * ((128'd1 << (2 * l)) + 128'd1);
      rhs = (128'd1 << (2 * CF + 2)) << (2 * l);
      if (lhs <= rhs) c = c + 1;
      tab[l] = c[31:0];
    end
    return tab;
  endfunction

  localparam logic [L-1:0][31:0] CTAB = make_ctab();
  localparam int unsigned LW = $clog2(L);

  fix_t a  [DIM][DIM];
  fix_t qm [DIM][DIM];

  logic [IW-1:0] pi [PAIRS];
  logic [IW-1:0] qi [PAIRS];
  logic          pv [PAIRS];
  logic [IW-1:0] round;
  logic          last_round;
  logic          run, rot_in_sweep;

  index_generator #(.DIM(DIM)) u_idx (
    .clk, .rst_n,
    .restart   (start),
    .advance   (run),
    .p         (pi),
    .q         (qi),
    .pair_valid(pv),
    .round,
    .last_round
  );

  // ---- per-pair angle selection (one cycle) ----
  logic          prot [PAIRS];
  logic [LW-1:0] pl   [PAIRS];
  logic          pneg [PAIRS];

  always_comb begin
    longint app, aqq, apq, diff, r, best, mag;
    app = 0; aqq = 0; apq = 0; diff = 0; r = 0; best = 0; mag = 0;
    for (int k = 0; k < int'(PAIRS); k++) begin
      prot[k] = 1'b0;
      pl[k]   = '0;
      pneg[k] = 1'b0;
      if (pv[k]) begin
        app  = longint'(a[pi[k]][pi[k]]);
        aqq  = longint'(a[qi[k]][qi[k]]);
        apq  = longint'(a[pi[k]][qi[k]]);
        diff = app - aqq;
        best = (apq < 0) ? -apq : apq;
        if (best > longint'(TOL)) begin
          for (int l = 0; l < int'(L); l++) begin
            for (int s = 0; s < 2; s++) begin
              r   = ((s == 1) ? -(diff >>> l) : (diff >>> l)) + apq - (apq >>> (2 * l));
              mag = (r < 0) ? -r : r;
              if (mag < best) begin
                best    = mag;
                prot[k] = 1'b1;
                pl[k]   = LW'(l);
                pneg[k] = (s == 1);
              end
            end
          end
        end
      end
    end
  end

  // ---- map pairs onto indices ----
  logic          is_p [DIM];
  logic          is_q [DIM];
  logic [IW-1:0] mate [DIM];
  logic [LW-1:0] il   [DIM];
  logic          ineg [DIM];

  always_comb begin
    for (int i = 0; i < int'(DIM); i++) begin
      is_p[i] = 1'b0; is_q[i] = 1'b0; mate[i] = '0; il[i] = '0; ineg[i] = 1'b0;
    end
    for (int k = 0; k < int'(PAIRS); k++) begin
      if (pv[k] && prot[k]) begin
        is_p[pi[k]] = 1'b1; mate[pi[k]] = qi[k]; il[pi[k]] = pl[k]; ineg[pi[k]] = pneg[k];
        is_q[qi[k]] = 1'b1; mate[qi[k]] = pi[k]; il[qi[k]] = pl[k]; ineg[qi[k]] = pneg[k];
      end
    end
  end

  // Rotation of element x with its partner y: p side  c (x - t y),
  // q side  c (t y + x), where t = (neg ? -1 : 1) 2^-l. The shifted term is
  // kept exact (L extra bits) and the scaled result is rounded to nearest, so
  // that rounding errors do not drift Q away from orthonormality.
  typedef logic signed [FIX_W+L+CF+4:0] wide_t;

  function automatic fix_t rot(fix_t x, fix_t y, logic [LW-1:0] l, logic neg, logic pside);
    wide_t xs, ys, v;
    xs = wide_t'(x) <<< L;
    ys = wide_t'(y) <<< (L - int'(l));
    if (neg) ys = -ys;
    v  = pside ? (xs - ys) : (xs + ys);
    v  = v * wide_t'({1'b0, CTAB[l]});
    v  = v + (wide_t'(1) <<< (L + CF - 1));
    return fix_t'(v >>> (L + CF));
  endfunction

  fix_t ra [DIM][DIM];   // after row rotation
  fix_t ca [DIM][DIM];   // after column rotation
  fix_t nq [DIM][DIM];
  logic any_rot;
  logic [IW:0] nrot;

  always_comb begin
    nrot = '0;
    for (int i = 0; i < int'(DIM); i++) nrot += (IW+1)'(is_p[i]);
    any_rot = (nrot != 0);
    for (int i = 0; i < int'(DIM); i++)
      for (int j = 0; j < int'(DIM); j++)
        ra[i][j] = (is_p[i] || is_q[i]) ? rot(a[i][j], a[mate[i]][j], il[i], ineg[i], is_p[i])
                                        : a[i][j];
    for (int i = 0; i < int'(DIM); i++)
      for (int j = 0; j < int'(DIM); j++) begin
        ca[i][j] = (is_p[j] || is_q[j]) ? rot(ra[i][j], ra[i][mate[j]], il[j], ineg[j], is_p[j])
                                        : ra[i][j];
        nq[i][j] = (is_p[j] || is_q[j]) ? rot(qm[i][j], qm[i][mate[j]], il[j], ineg[j], is_p[j])
                                        : qm[i][j];
      end
  end

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; sweeps <= '0; rotations <= '0; rot_in_sweep <= 1'b0;
      for (int i = 0; i < int'(DIM); i++)
        for (int j = 0; j < int'(DIM); j++) begin
          a[i][j]  <= '0;
          qm[i][j] <= (i == j) ? FIX_ONE : '0;
        end
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (wr_en)
          for (int j = 0; j < int'(DIM); j++) a[wr_row][j] <= wr_data[j];
        if (start) begin
          run <= 1'b1; sweeps <= '0; rotations <= '0; rot_in_sweep <= 1'b0;
          for (int i = 0; i < int'(DIM); i++)
            for (int j = 0; j < int'(DIM); j++) qm[i][j] <= (i == j) ? FIX_ONE : '0;
        end
      end else begin
        // keep A exactly symmetric: take the upper triangle
        for (int i = 0; i < int'(DIM); i++)
          for (int j = 0; j < int'(DIM); j++) begin
            a[i][j]  <= (j >= i) ? ca[i][j] : ca[j][i];
            qm[i][j] <= nq[i][j];
          end
        rotations <= rotations + 32'(nrot);
        if (any_rot) rot_in_sweep <= 1'b1;
        if (last_round) begin
          sweeps       <= sweeps + 1'b1;
          rot_in_sweep <= 1'b0;
          if (!(rot_in_sweep || any_rot) || (int'(sweeps) + 1 >= int'(MAX_SWEEPS))) begin
            run  <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assign busy = run;

  always_comb begin
    for (int i = 0; i < int'(DIM); i++) begin
      eig[i] = a[i][i];
      for (int j = 0; j < int'(DIM); j++) q_out[i][j] = qm[i][j];
    end
  end

endmodule
