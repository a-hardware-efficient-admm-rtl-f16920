// hinge_update: element-wise hinge-loss proximal step of the ADMM iteration.
//
// Given theta_i = mu1 + u_i - mu1 * (Z S)_i, it forms
//   a_hat = S_1(theta) = theta - 1 for theta > 1, 0 for 0 <= theta <= 1,
//           theta for theta < 0,
//   u_new = theta - a_hat.
// This is the scaled shrinkage operator of the paper: because a_hat = mu1 * a,
// the 1/mu1 and mu1 factors cancel and the threshold is the constant 1, so no
// multiplier is needed. Purely combinational; the trainer applies it to one
// element per clock.
module hinge_update
  import svm_pkg::*;
(
  input  fix_t theta,
  output fix_t a_hat,
  output fix_t u_new
);

  always_comb begin
    if (theta > FIX_ONE)      a_hat = theta - FIX_ONE;
    else if (theta < 0)       a_hat = theta;
    else                      a_hat = '0;
    u_new = theta - a_hat;
  end

endmodule
