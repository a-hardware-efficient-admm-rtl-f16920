// decision_block: classifies one feature vector with the trained model.
//
// The feature extractor delivers the R features of a vector one per clock
// (`in_valid`, `in_last` on the final one). The block accumulates
// score = sum_k x_k beta_k + beta_0 and, one clock after the last feature,
// presents `out_valid` with the class decision = (score >= 0), i.e. the sign
// of the linear classifier output; 1 stands for class +1 (the class the
// stimulator acts on). The model is the vector beta[0..R-1] with the bias in
// beta[R], as left by the trainer. Features beyond R are ignored. Mapping a
// score of exactly zero to class +1 is this design's choice.
module decision_block
  import svm_pkg::*;
#(
  parameter int unsigned R = 16,
  localparam int unsigned D = R + 1,
  localparam int unsigned KW = $clog2(D)
) (
  input  logic clk,
  input  logic rst_n,
  input  fix_t beta [D],
  input  logic in_valid,
  input  fix_t in_data,
  input  logic in_last,
  output logic out_valid,
  output logic decision,
  output fix_t score
);

  logic [KW-1:0] k;
  fix_t          acc;
  fix_t          term;

  always_comb begin
    term = '0;
    for (int i = 0; i < int'(R); i++) if (int'(k) == i) term = fmul(in_data, beta[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; acc <= '0; out_valid <= 1'b0; decision <= 1'b0; score <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          score     <= acc + term + beta[R];
          decision  <= !((acc + term + beta[R]) < 0);
          out_valid <= 1'b1;
          acc       <= '0;
          k         <= '0;
        end else begin
          acc <= acc + term;
          if (int'(k) < int'(R)) k <= k + 1'b1;
        end
      end
    end
  end

endmodule
