// hrfna_pkg -- types, constants and arithmetic helpers shared by the HRFNA
// (hybrid residue / floating) datapath.
//
// A hybrid number is a pair (r, f): r is a residue vector over K pairwise
// coprime moduli and f a signed power-of-two exponent.  Its value is
// N * 2^f, where N = CRT(r) is read as a signed integer in [-M/2, M/2).
//
// The modulus set, the residue width and the exponent width are package
// constants because they fix the widths of the shared structs.  Everything
// derived from the modulus set (M, M_i = M/m_i, |M_i^-1|_{m_i}, Barrett
// constants, the powers of two used for re-encoding and the fixed-point
// reciprocals used by the interval evaluation) is computed by constant
// functions below, so changing MODULI is enough to retarget the design.
//
// Paper vs. this design: the number of residues (five) matches the five
// residues x1..x5 drawn in the conceptual figure of the paper; the actual
// moduli, widths and the signed (symmetric) reading of N are choices of this
// design, since the paper gives no numbers for them.
package hrfna_pkg;

  // ------------------------------------------------------------------
  // Modulus set: five pairwise coprime 13/14-bit moduli, M ~ 2^65.
  // 8191 (prime), 8192 (2^13), 8193 (3*2731), 8189 (19*431), 8185 (5*1637)
  // ------------------------------------------------------------------
  localparam int K  = 5;                 // number of residue channels
  localparam int RW = 14;                // residue word width (covers 8193)
  localparam int unsigned MODULI [K] = '{32'd8191, 32'd8192, 32'd8193, 32'd8189, 32'd8185};

  localparam int NW  = 66;               // signed integer width, |N| < M/2 < 2^64
  localparam int UW  = 68;               // width of the unreduced CRT sum (< K*M)
  localparam int EW  = 10;               // exponent width (signed)
  localparam int SHW = 7;                // width of a scaling shift amount
  localparam int CW  = 13;               // chunk width used by residue re-encoding
  localparam int NCH = 5;                // chunks covering [0, M) (5*13 = 65 bits)

  // Interval evaluation: fixed-point fraction of N/M with FW bits, turned
  // into a small float with an FEW-bit exponent and an MANT_W-bit mantissa.
  localparam int FW     = 32;
  localparam int GW     = 14;            // guard bits of the reciprocal, 2^GW > max m_i
  localparam int MANT_W = 24;
  localparam int FEW    = 6;             // exponent field holds 0..FW

  typedef logic [RW-1:0]         res_t;
  typedef res_t [K-1:0]          rvec_t;
  typedef logic signed [EW-1:0]  exp_t;
  typedef logic signed [NW-1:0]  sint_t;

  typedef struct packed {
    rvec_t r;
    exp_t  f;
  } hnum_t;

  // Operation performed by one residue channel.
  typedef enum logic {CH_ADD = 1'b0, CH_MUL = 1'b1} ch_op_e;

  // Operations accepted by the HRFNA unit.
  typedef enum logic [2:0] {
    OP_MUL  = 3'd0,   // Z = X (x) Y, streamed out
    OP_ADD  = 3'd1,   // Z = X (+) Y with exponent synchronisation, streamed out
    OP_MAC  = 3'd2,   // A[a] <- A[a] + X (x) Y
    OP_LOAD = 3'd3,   // A[a] <- X
    OP_READ = 3'd4    // reconstruct A[a] and stream it out
  } op_e;

  // Floating-point magnitude estimate of |N|/M: value = 0.1m * 2^(e-FW),
  // e == 0 means zero.  For positive floats {e, m} compares as an unsigned
  // number, which is what the FP max comparators rely on.
  typedef struct packed {
    logic [FEW-1:0]    e;
    logic [MANT_W-1:0] m;
  } fpm_t;

  typedef struct packed {
    fpm_t lo;
    fpm_t hi;
  } ival_t;

  // ------------------------------------------------------------------
  // Modular arithmetic helpers
  // ------------------------------------------------------------------

  // Barrett constant for inputs below 2^32: mu = floor(2^32 / m).
  function automatic logic [32:0] barrett_mu(input int unsigned m);
    logic [63:0] one;
    one = 64'd1 << 32;
    return 33'(one / 64'(m));
  endfunction

  // x mod m for x < 2^32 by Barrett reduction: q = (x * mu) >> 32 is at most
  // two below floor(x/m), so at most two correction subtractions follow.
  function automatic res_t barrett(input logic [31:0] x, input int unsigned m,
                                   input logic [32:0] mu);
    logic [65:0] prod;
    logic [31:0] q, r;
    prod = 66'(x) * 66'(mu);
    q    = prod[63:32];
    r    = x - q * m;
    if (r >= m) r = r - m;
    if (r >= m) r = r - m;
    return res_t'(r);
  endfunction

  // Modular addition: adder followed by one conditional subtraction.
  function automatic res_t mod_add(input res_t a, input res_t b, input int unsigned m);
    logic [RW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (RW+1)'(m)) s = s - (RW+1)'(m);
    return res_t'(s);
  endfunction

  // ------------------------------------------------------------------
  // CRT constants (elaboration time)
  // ------------------------------------------------------------------

  function automatic logic [UW-1:0] crt_M();
    logic [UW-1:0] p;
    p = 1;
    for (int j = 0; j < K; j++) p = p * UW'(MODULI[j]);
    return p;
  endfunction

  // M_i = M / m_i
  function automatic logic [UW-1:0] crt_Mi(input int i);
    logic [UW-1:0] p;
    p = 1;
    for (int j = 0; j < K; j++) if (j != i) p = p * UW'(MODULI[j]);
    return p;
  endfunction

  // |M_i^-1|_{m_i} by the extended Euclidean algorithm.
  function automatic int unsigned crt_inv(input int i);
    longint m, a, t0, t1, r0, r1, q, tmp;
    m = longint'(MODULI[i]);
    a = 1;
    for (int j = 0; j < K; j++) if (j != i) a = (a * longint'(MODULI[j])) % m;
    r0 = m;  r1 = a;  t0 = 0;  t1 = 1;
    while (r1 != 0) begin
      q   = r0 / r1;
      tmp = r0 - q * r1;  r0 = r1;  r1 = tmp;
      tmp = t0 - q * t1;  t0 = t1;  t1 = tmp;
    end
    if (t0 < 0) t0 = t0 + m;
    return 32'(t0);
  endfunction

  // |2^(CW*j)|_{m_i}, used to re-encode a binary integer chunk by chunk.
  function automatic int unsigned pow2_mod(input int i, input int j);
    longint p;
    p = 1;
    for (int b = 0; b < CW * j; b++) p = (p * 2) % longint'(MODULI[i]);
    return 32'(p);
  endfunction

  // floor(2^(FW+GW) / m_i): fixed-point reciprocal for the interval evaluation.
  function automatic logic [FW+GW:0] recip(input int i);
    logic [FW+GW+1:0] one;
    one = (FW+GW+2)'(1) << (FW + GW);
    return (FW+GW+1)'(one / (FW+GW+2)'(MODULI[i]));
  endfunction

  // Constant tables derived from the modulus set, evaluated once at
  // elaboration so that no loop of the functions above ends up in logic.
  typedef int unsigned        k_int_t  [K];
  typedef logic [32:0]        k_mu_t   [K];
  typedef logic [FW+GW:0]     k_rcp_t  [K];
  typedef logic [UW-1:0]      k_big_t  [K];
  typedef int unsigned        k_pow_t  [K*NCH];

  function automatic k_int_t all_inv();
    k_int_t o;
    for (int i = 0; i < K; i++) o[i] = crt_inv(i);
    return o;
  endfunction
  function automatic k_mu_t all_mu();
    k_mu_t o;
    for (int i = 0; i < K; i++) o[i] = barrett_mu(MODULI[i]);
    return o;
  endfunction
  function automatic k_rcp_t all_recip();
    k_rcp_t o;
    for (int i = 0; i < K; i++) o[i] = recip(i);
    return o;
  endfunction
  function automatic k_big_t all_Mi();
    k_big_t o;
    for (int i = 0; i < K; i++) o[i] = crt_Mi(i);
    return o;
  endfunction
  function automatic k_pow_t all_pow2();
    k_pow_t o;
    for (int i = 0; i < K; i++)
      for (int j = 0; j < NCH; j++) o[i*NCH + j] = pow2_mod(i, j);
    return o;
  endfunction

  localparam k_int_t        CRT_INV = all_inv();    // |M_i^-1|_{m_i}
  localparam k_mu_t         BMU     = all_mu();     // floor(2^32 / m_i)
  localparam k_rcp_t        RECIP   = all_recip();  // floor(2^(FW+GW) / m_i)
  localparam k_big_t        CRT_MI  = all_Mi();     // M / m_i
  localparam k_pow_t        POW2    = all_pow2();   // |2^(CW*j)|_{m_i} at [i*NCH + j]
  localparam logic [UW-1:0] CRT_MM  = crt_M();      // M

  // ------------------------------------------------------------------
  // Fixed-point fraction (FW bits) -> small float.  round_up selects an
  // upward-rounded mantissa, so an upper bound stays an upper bound.
  // ------------------------------------------------------------------
  function automatic fpm_t frac_to_fpm(input logic [FW-1:0] v, input logic round_up);
    fpm_t  o;
    int    lz;
    logic [FW-1:0] sh;
    logic [MANT_W:0] mr;
    lz = FW;
    for (int b = 0; b < FW; b++) if (v[b]) lz = FW - 1 - b;
    if (v == '0) begin
      o.e = '0;
      o.m = '0;
    end else begin
      sh = v << lz;
      mr = {1'b0, sh[FW-1 -: MANT_W]};
      if (round_up && (sh[FW-MANT_W-1:0] != '0)) mr = mr + 1'b1;
      if (mr[MANT_W]) begin
        o.e = FEW'(FW - lz + 1);
        o.m = {1'b1, {(MANT_W-1){1'b0}}};
      end else begin
        o.e = FEW'(FW - lz);
        o.m = mr[MANT_W-1:0];
      end
    end
    return o;
  endfunction

  // Threshold tau = 2^tau_log2 as a float of tau/M, rounded down so that the
  // comparison "estimate >= threshold" never fires late.
  function automatic fpm_t tau_fpm(input int tau_log2);
    logic [127:0] num;
    logic [127:0] q;
    num = 128'd1 << (tau_log2 + FW);
    q   = num / 128'(crt_M());
    return frac_to_fpm(FW'(q), 1'b0);
  endfunction

  // Residue vector of the value 1.
  function automatic rvec_t rvec_one();
    rvec_t o;
    for (int i = 0; i < K; i++) o[i] = res_t'(1);
    return o;
  endfunction

endpackage
