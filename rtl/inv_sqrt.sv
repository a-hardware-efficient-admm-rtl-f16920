// inv_sqrt: y = d^(-1/2) for a positive fixed-point d, one result bit per clock.
//
// Used to scale the eigenvectors by D^-1/2 when the pre-computed matrix
// Z = Y X~ Q D^-1/2 is formed. The result is found bit by bit from the most
// significant bit down: a trial bit is kept when (y_trial)^2 * d <= 1, which
// gives the largest representable y with y^2 d <= 1 (a truncated result).
// The paper realises non-linear functions with CORDIC PEs; this restoring
// search is this design's simpler substitute. Latency: FIX_W clocks from
// `start` to `done`. A non-positive d returns 0 and raises `bad`.
module inv_sqrt
  import svm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fix_t d,
  output logic busy,
  output logic done,
  output logic bad,
  output fix_t y
);

  localparam int unsigned BW = $clog2(FIX_W);

  fix_t            dr;
  logic [BW-1:0]   bitpos;
  logic [FIX_W-1:0] yr;

  logic [FIX_W-1:0]   trial;
  logic [3*FIX_W-1:0] lhs;

  always_comb begin
    trial = yr | (FIX_W'(1) << bitpos);
    lhs   = (3*FIX_W)'(trial) * (3*FIX_W)'(trial) * (3*FIX_W)'($unsigned(dr));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; bad <= 1'b0; dr <= '0; bitpos <= '0; yr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        dr  <= d;
        yr  <= '0;
        bad <= (d <= 0);
        if (d <= 0) done <= 1'b1;
        else begin
          busy   <= 1'b1;
          bitpos <= BW'(FIX_W - 2);
        end
      end else if (busy) begin
        if (lhs <= ((3*FIX_W)'(1) << (3*FRAC_W))) yr <= trial;
        if (bitpos == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else bitpos <= bitpos - 1'b1;
      end
    end
  end

  assign y = fix_t'(yr);

endmodule
