// pe_array: the 4 x 8 processing-element array of the SVM engine.
//
// ROWS x COLS lanes each hold one multiplier. A configuration controller sets
// the array either as independent multiply-and-accumulate lanes
// (acc[k] += a[k] * b[k], registered, one result per clock per lane) or as an
// adder tree that reduces the lane products to a single dot product
// (tree_sum = sum_k a[k] * b[k], combinational, valid in the same cycle).
// Lanes whose enable bit is 0 contribute nothing to the tree and keep their
// accumulator. The array size follows the 4 x 8 array of the chip; the
// CORDIC-based PE of the chip is replaced here by a plain multiplier per lane,
// which is this design's choice.
module pe_array
  import svm_pkg::*;
#(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 8,
  localparam int unsigned LANES = ROWS * COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pe_mode_e         mode,
  input  logic [LANES-1:0] lane_en,
  input  fix_t             a [LANES],
  input  fix_t             b [LANES],
  output fix_t             acc [LANES],
  output fix_t             tree_sum
);

  fix_t prod [LANES];

  always_comb begin
    for (int k = 0; k < LANES; k++) prod[k] = fmul(a[k], b[k]);
  end

  // Adder tree (behaviourally a sum; synthesis builds the tree).
  always_comb begin
    tree_sum = '0;
    for (int k = 0; k < LANES; k++)
      if (lane_en[k]) tree_sum = tree_sum + prod[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LANES; k++) acc[k] <= '0;
    end else begin
      unique case (mode)
        PE_CLR: for (int k = 0; k < LANES; k++) acc[k] <= '0;
        PE_MAC: for (int k = 0; k < LANES; k++)
                  if (lane_en[k]) acc[k] <= acc[k] + prod[k];
        default: ;
      endcase
    end
  end

endmodule
