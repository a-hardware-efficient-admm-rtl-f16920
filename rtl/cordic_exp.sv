// cordic_exp: e^(-t) for t >= 0 by range reduction and hyperbolic CORDIC.
//
// The RBF kernel k = exp(gamma ||xi - xj||^2), gamma < 0, is evaluated with
// this unit, in keeping with the CORDIC-based processing of the paper.
// Method: t log2(e) = n + f (integer n, fraction f), so
// e^-t = 2^-n e^z with z = -f ln 2 in (-0.694, 0]. e^z = cosh z + sinh z is
// produced by hyperbolic CORDIC in rotation mode, started at x = 1/K, y = 0,
// with shifts 1 .. 16 and the usual repeats of 4 and 13 (18 micro-rotations).
// The CORDIC works on Q2.30 words; the result is shifted by n and rounded
// back to Q15.16. Constants (atanh 2^-i, 1/K) are computed at elaboration from
// their series. Timing: `start` with t; `done` pulses 20 clocks later with
// `y` valid (held until the next start). The argument reduction, word
// lengths and iteration count are this design's choices.
module cordic_exp
  import svm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fix_t t,
  output logic busy,
  output logic done,
  output fix_t y
);

  localparam int unsigned NIT = 18;

  // shift sequence 1,2,3,4,4,5,...,13,13,14,15,16
  function automatic logic [NIT-1:0][4:0] make_seq();
    logic [NIT-1:0][4:0] s;
    int n;
    n = 0;
    for (int i = 1; i <= 16; i++) begin
      s[n] = 5'(i); n++;
      if (i == 4 || i == 13) begin s[n] = 5'(i); n++; end
    end
    return s;
  endfunction

  localparam logic [NIT-1:0][4:0] SEQ = make_seq();

  // atanh(2^-i) = sum_k 2^(-i(2k+1)) / (2k+1), in Q30 (computed in Q60)
  function automatic logic [NIT-1:0][31:0] make_atanh();
    logic [NIT-1:0][31:0] tab;
    logic [127:0] acc;
    int e;
    for (int s = 0; s < int'(NIT); s++) begin
      acc = '0;
      for (int k = 0; k < 40; k++) begin
        e = 60 - int'(SEQ[s]) * (2 * k + 1);
        if (e >= 0) acc = acc + ((128'd1 << e) / 128'(2 * k + 1));
      end
      tab[s] = 32'((acc + (128'd1 << 29)) >> 30);
    end
    return tab;
  endfunction

  // 1/K = prod (1 - 4^-i)^-1/2 over the sequence, Q30
  function automatic logic [31:0] make_invk();
    logic [127:0] p, yv, tr;
    p = 128'd1 << 60;
    for (int s = 0; s < int'(NIT); s++)
      p = (p * ((128'd1 << 60) - (128'd1 << (60 - 2 * int'(SEQ[s]))))) >> 60;
    yv = '0;
    for (int bt = 31; bt >= 0; bt--) begin
      tr = yv | (128'd1 << bt);
      if (tr * tr * p <= (128'd1 << 120)) yv = tr;   // y^2 (Q60) * p (Q60) <= 1 (Q120)
    end
    return yv[31:0];
  endfunction

  localparam logic [NIT-1:0][31:0] ATANH = make_atanh();
  localparam logic [31:0]          INVK  = make_invk();
  localparam fix_t LOG2E = fix_t'(94548);   // log2(e) in Q15.16
  localparam logic signed [35:0] LN2_Q30 = 36'sd744261118;  // ln 2 in Q30

  typedef logic signed [35:0] cw_t;

  cw_t  x, yy, z;
  logic [4:0] it;
  logic [15:0] n;
  logic run;

  // one micro-rotation
  cw_t  xs, ys, xn, yn, zn;
  always_comb begin
    xs = x  >>> SEQ[it];
    ys = yy >>> SEQ[it];
    if (z < 0) begin
      xn = x - ys; yn = yy - xs; zn = z + cw_t'({4'b0, ATANH[it]});
    end else begin
      xn = x + ys; yn = yy + xs; zn = z - cw_t'({4'b0, ATANH[it]});
    end
  end

  // range reduction
  logic signed [63:0] p;
  logic signed [35:0] zf;
  always_comb begin
    p  = 64'(t) * 64'(LOG2E);                         // Q32
    zf = 36'(-((64'(p[31:0]) * 64'(LN2_Q30)) >>> 32));  // -f ln2, Q30
  end

  // result: (x + y) Q30 -> Q16, shifted right by n, rounded
  cw_t  sum;
  logic [31:0] res;
  always_comb begin
    sum = x + yy;
    if (n >= 16'd40) res = '0;
    else res = 32'((64'($unsigned(sum)) + (64'd1 << (13 + n))) >> (14 + n));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; yy <= '0; z <= '0; it <= '0; n <= '0; run <= 1'b0; done <= 1'b0; y <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1;
        it  <= '0;
        x   <= cw_t'({4'b0, INVK});
        yy  <= '0;
        z   <= zf;
        n   <= (t < 0) ? 16'd0 : ((p[63:32] > 32'd65535) ? 16'hFFFF : 16'(p[63:32]));
      end else if (run) begin
        if (int'(it) == int'(NIT)) begin
          y    <= res;
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          x <= xn; yy <= yn; z <= zn;
          it <= it + 1'b1;
        end
      end
    end
  end

  assign busy = run;

endmodule
