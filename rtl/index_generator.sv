// index_generator: Jacobi rotation index pairs for the parallel EVD.
//
// For an n x n symmetric matrix the generator lists, round by round, a set of
// disjoint (p, q) index pairs such that one sweep of M-1 rounds visits every
// off-diagonal pair exactly once (M = n rounded up to even). It uses the
// round-robin ("circle") schedule: in round r, index M-1 meets r and, for
// k = 1 .. M/2-1, index (r+k) mod (M-1) meets (r-k) mod (M-1). A pair that
// names the padding index n (odd n) is flagged invalid. All M/2 pairs of a
// round are produced in the same cycle so that the EVD array can rotate them
// in parallel. The chip shows four generator units G1..G4 without saying how
// the work is split among them; here a single unit produces every pair.
//
// Interface: `restart` returns to round 0; `advance` steps to the next round
// and wraps after the last. `last_round` is high in round M-2. Pairs are
// combinational from the round register and have p < q.
module index_generator #(
  parameter int unsigned DIM   = 17,
  localparam int unsigned M     = (DIM % 2 == 0) ? DIM : DIM + 1,
  localparam int unsigned PAIRS = M / 2,
  localparam int unsigned IW    = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          advance,
  output logic [IW-1:0] p [PAIRS],
  output logic [IW-1:0] q [PAIRS],
  output logic          pair_valid [PAIRS],
  output logic [IW-1:0] round,
  output logic          last_round
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 round <= '0;
    else if (restart)           round <= '0;
    else if (advance)           round <= last_round ? '0 : round + 1'b1;
  end

  assign last_round = (int'(round) == M - 2);

  always_comb begin
    int r, x, y;
    r = int'(round);
    for (int k = 0; k < PAIRS; k++) begin
      if (k == 0) begin
        x = r;
        y = M - 1;
      end else begin
        x = (r + k) % (M - 1);
        y = (r - k + M - 1) % (M - 1);
      end
      p[k] = IW'((x < y) ? x : y);
      q[k] = IW'((x < y) ? y : x);
      pair_valid[k] = (x < DIM) && (y < DIM);
    end
  end

endmodule
