// crt_normalizer -- CRT-based normalization engine.
//
// Takes a hybrid number (r, f) and a shift amount sh and returns
//   N   = CRT(r) read as a signed integer in [-M/2, M/2)
//   N~  = floor(N / 2^sh)          (arithmetic right shift, rounds to -inf)
//   r~  = residues of N~,  f~ = f + sh
// The same engine serves threshold normalization (sh = s), exponent
// synchronisation before an addition (sh = exponent difference) and plain
// reconstruction for read-out (sh = 0, r~ = r).
//
// Pipeline (six register stages, latency LAT = 6, one new job per cycle):
//   1  y_i = |x_i * M_i^-1|_{m_i}            (Barrett, per channel)
//   2  T   = sum_i y_i * M_i                   (T < K*M)
//   3  X   = T - q*M with q the number of multiples of M not above T;
//      N   = X - M if X >= M/2, else X         (signed reading)
//   4  N~  = N >>> sh,  f~ = f + sh            (exponent update)
//   5  U   = N~ mod M (add M when negative); U is cut into 13-bit chunks c_j
//      and s_i = sum_j c_j * |2^(13 j)|_{m_i}  (re-encoding, constants)
//   6  r~_i = s_i mod m_i                      (Barrett)
// Interface: in_valid with r, f, sh and a caller-defined tag; out_valid LAT
// cycles later with the results and the same tag, so several jobs can be in
// flight and the caller can tell which result is which.  The engine has no stall input: once started a job always
// finishes after LAT cycles.  f + sh is not range checked (the caller keeps
// exponents small; see the exponent pipeline for the saturating path).
//
// From the paper: selection by idx (done by the caller), CRT reconstruction,
// right shift by s, re-encoding into residues, exponent incremented by s,
// pipelined with a bounded latency.  The stage split, the chunked
// re-encoding and the signed reading of N are this design's choices.
module crt_normalizer
  import hrfna_pkg::*;
#(
  parameter int TAG_W = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  rvec_t           in_r,
  input  exp_t            in_f,
  input  logic [SHW-1:0]  in_sh,
  input  logic [TAG_W-1:0] in_tag,
  output logic            out_valid,
  output logic [TAG_W-1:0] out_tag,
  output rvec_t           out_r,
  output exp_t            out_f,
  output sint_t           out_n,     // reconstructed N before scaling
  output sint_t           out_ns     // scaled N~
);

  localparam int LAT = 6;
  localparam logic [UW-1:0] M_U    = CRT_MM;
  localparam logic [UW-1:0] HALF_M = CRT_MM >> 1;

  logic [LAT-1:0] vld_q;
  logic [TAG_W-1:0] tag_q [LAT];

  // stage 1
  rvec_t          y1;
  exp_t           f1;
  logic [SHW-1:0] sh1;
  // stage 2
  logic [UW-1:0]  t2;
  exp_t           f2;
  logic [SHW-1:0] sh2;
  // stage 3
  sint_t          n3;
  exp_t           f3;
  logic [SHW-1:0] sh3;
  // stage 4
  sint_t          n4, ns4;
  exp_t           f4;
  // stage 5
  logic [31:0]    s5 [K];
  sint_t          n5, ns5;
  exp_t           f5;

  // combinational helpers
  logic [UW-1:0]  t_d, x_d, u_d;
  sint_t          n_d;
  logic [31:0]    s_d [K];

  always_comb begin
    t_d = '0;
    for (int i = 0; i < K; i++) t_d = t_d + UW'(y1[i]) * CRT_MI[i];
  end

  always_comb begin
    x_d = t2;
    for (int j = 1; j < K; j++)
      if (x_d >= M_U) x_d = x_d - M_U;
    if (x_d >= HALF_M) n_d = sint_t'(x_d - M_U);
    else               n_d = sint_t'(x_d);
  end

  always_comb begin
    if (ns4 < 0) u_d = UW'(ns4) + M_U;   // two's complement wrap then + M
    else         u_d = UW'(ns4);
    for (int i = 0; i < K; i++) begin
      s_d[i] = '0;
      for (int j = 0; j < NCH; j++)
        s_d[i] = s_d[i] + 32'(u_d[CW*j +: CW]) * POW2[i*NCH + j];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= '0;
      for (int i = 0; i < LAT; i++) tag_q[i] <= '0;
      y1 <= '0;  f1 <= '0;  sh1 <= '0;
      t2 <= '0;  f2 <= '0;  sh2 <= '0;
      n3 <= '0;  f3 <= '0;  sh3 <= '0;
      n4 <= '0;  ns4 <= '0; f4 <= '0;
      n5 <= '0;  ns5 <= '0; f5 <= '0;
      for (int i = 0; i < K; i++) s5[i] <= '0;
      out_r <= '0; out_f <= '0; out_n <= '0; out_ns <= '0;
    end else begin
      vld_q <= {vld_q[LAT-2:0], in_valid};
      tag_q[0] <= in_tag;
      for (int i = 1; i < LAT; i++) tag_q[i] <= tag_q[i-1];
      // 1: y_i
      for (int i = 0; i < K; i++)
        y1[i] <= barrett(32'(in_r[i]) * CRT_INV[i], MODULI[i], BMU[i]);
      f1  <= in_f;
      sh1 <= in_sh;
      // 2: weighted sum
      t2  <= t_d;
      f2  <= f1;
      sh2 <= sh1;
      // 3: reduce mod M, signed reading
      n3  <= n_d;
      f3  <= f2;
      sh3 <= sh2;
      // 4: scaling and exponent update
      n4  <= n3;
      ns4 <= n3 >>> sh3;
      f4  <= f3 + exp_t'(sh3);
      // 5: chunked re-encoding
      for (int i = 0; i < K; i++) s5[i] <= s_d[i];
      n5  <= n4;
      ns5 <= ns4;
      f5  <= f4;
      // 6: final reduction
      for (int i = 0; i < K; i++)
        out_r[i] <= barrett(s5[i], MODULI[i], BMU[i]);
      out_n  <= n5;
      out_ns <= ns5;
      out_f  <= f5;
    end
  end

  assign out_valid = vld_q[LAT-1];
  assign out_tag   = tag_q[LAT-1];

endmodule
