// interval_eval -- conservative floating-point interval of |N|/M for one
// residue vector, computed without a full CRT reconstruction.
//
// How it works.  By the CRT, N/M = frac( sum_i y_i / m_i ) with
// y_i = |x_i * M_i^-1|_{m_i}.  Each term y_i/m_i is approximated from below
// by a fixed-point number with FW fraction bits, t_i = (y_i * R_i) >> GW with
// R_i = floor(2^(FW+GW)/m_i); each t_i is at most 2 units below the exact
// term, so the exact fraction lies in [S, S + 2K - 1] (units of 2^-FW,
// modulo 1) where S = sum t_i mod 2^FW.  The fraction interval is then
// folded into a magnitude interval: below one half the number is positive
// (|N|/M = frac), above one half it is negative (|N|/M = 1 - frac); an
// interval that wraps through zero gives [0, max], one that straddles one
// half is widened to reach one half.  Both bounds are finally turned into
// small floats (MANT_W-bit mantissa), the upper bound rounded up, the lower
// one rounded down, so the interval stays conservative.
//
// Stages (latency 2, en advances both):
//   stage 1 ("CRT approximation")  y_i by Barrett reduction of x_i * inv_i
//   stage 2 ("scaling")            t_i, S, folding, float conversion
//
// From the paper: an interval [f_min, f_max] per residue vector, conservative,
// cheaper than exact reconstruction, built from a CRT approximation and a
// scaling step.  The fractional-CRT formulation, the fixed-point precision
// and the folding rules for signed values are this design's choices.
module interval_eval
  import hrfna_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  rvec_t r,
  output ival_t iv
);

  localparam logic [FW:0] ONE  = (FW+1)'(1) << FW;
  localparam logic [FW:0] HALF = (FW+1)'(1) << (FW - 1);

  rvec_t y_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_q <= '0;
    end else if (en) begin
      for (int i = 0; i < K; i++)
        y_q[i] <= barrett(32'(r[i]) * CRT_INV[i], MODULI[i], BMU[i]);
    end
  end

  logic [FW+GW+RW:0] prod;
  logic [FW-1:0]     s;
  logic [FW:0]       lo, hi, mlo, mhi;
  ival_t             iv_d;

  always_comb begin
    s = '0;
    for (int i = 0; i < K; i++) begin
      prod = (FW+GW+RW+1)'(y_q[i]) * (FW+GW+RW+1)'(RECIP[i]);
      s    = s + FW'(prod >> GW);
    end
    lo = {1'b0, s};
    hi = lo + (FW+1)'(2 * K - 1);
    if (hi >= ONE) begin
      // wraps through zero: value near zero, sign unknown
      mlo = '0;
      mhi = ((ONE - lo) > (hi - ONE)) ? (ONE - lo) : (hi - ONE);
    end else if (hi < HALF) begin
      mlo = lo;
      mhi = hi;
    end else if (lo >= HALF) begin
      mlo = ONE - hi;
      mhi = ONE - lo;
    end else begin
      // straddles one half: magnitude close to M/2
      mlo = (lo < (ONE - hi)) ? lo : (ONE - hi);
      mhi = HALF;
    end
    iv_d.lo = frac_to_fpm(FW'(mlo), 1'b0);
    iv_d.hi = frac_to_fpm(FW'(mhi), 1'b1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  iv <= '0;
    else if (en) iv <= iv_d;
  end

endmodule
