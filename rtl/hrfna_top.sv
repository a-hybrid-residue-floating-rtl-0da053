// hrfna_top -- HRFNA arithmetic unit: residue and exponent pipelines,
// hybrid accumulators, magnitude monitor and one shared CRT normalization
// engine.
//
// Operations (in_op, one accepted per cycle when in_ready is high):
//   OP_MUL   Z = X (x) Y : residues multiplied channel by channel, f_X + f_Y;
//            exact, streamed out on out_*
//   OP_ADD   Z = X (+) Y : if f_X != f_Y the operand with the lower exponent
//            is first scaled by 2^-delta through the normalization engine
//            (the input stage stalls meanwhile); then residue-wise addition
//            with the common exponent; streamed out on out_*
//   OP_MAC   A[a] <- A[a] + X (x) Y : product as for OP_MUL, then
//            accumulation into accumulator a.  Equal exponents: added at
//            once.  Product exponent lower: the product is sent through the
//            normalization engine as a streamed job and added on the
//            accumulator's second port six cycles later, without stalling.
//            Product exponent higher: the accumulator is first scaled up to
//            the product's exponent (an exclusive job, see below).
//   OP_LOAD  A[a] <- X   (initialises an accumulator and its exponent)
//   OP_READ  A[a] is reconstructed by CRT (shift 0) and streamed out with its
//            exact integer N on out_n
//
// Datapath.  The operand stage S0 holds (r, f) of X and Y.  From S0 the
// residues go to residue_pipeline and the exponents to exponent_pipeline,
// both two cycles deep, and meet again in stage A (the pipelines' output
// registers), which retires the operation: emits it, accumulates it, loads it.
// No normalization logic sits on this path.
//
// Control.  magnitude_monitor continuously estimates |N| of all accumulators
// and raises a request with the index of the largest one when its upper bound
// reaches tau = 2^TAU_LOG2; the unit then normalizes that accumulator by
// 2^SCALE_S (N <- floor(N / 2^s), f <- f + s).  The normalization engine is
// fully pipelined and carries a tag with each job.  Streamed product
// synchronisations share it with the exclusive jobs (threshold
// normalization, accumulator synchronisation, read-out, S0 operand
// synchronisation), which change an accumulator's exponent or need its
// complete value; an exclusive job therefore starts only when no streamed job
// is in flight, and the whole pipeline is frozen (in_ready low) from its
// request to its end, 1 + 6 cycles at least.  Priority among exclusive jobs:
// stage A > monitor request > S0.  A LOAD waits in stage A until no streamed
// job is in flight, because it replaces the exponent the in-flight products
// were aligned to.  A streamed product is scaled to the accumulator exponent
// exactly, except when the exponents differ by more than 127: the shift is
// then clamped to 127, which gives the same integer (0 or -1) as the full
// shift for any |N| < 2^65, so only the discarded exponent differs.
//
// Outputs: out_valid pulses for each MUL/ADD result (at stage A, 3 cycles after
// acceptance when nothing stalls) and for each READ (when its job ends).
// evt_* pulse once per event, for counting (evt_sync also for every streamed
// product return); exp_ovf is sticky and reports an exponent sum that
// saturated.  Two sub-block outputs are left unconnected on purpose: the
// monitor's interval of the largest value (mon_iv, only the request and the
// index are needed for control) and the normalizer's scaled integer (nz_ns;
// the unit outputs the exact N of a read-out, which is taken at shift 0).
//
// From the paper: the split into residue pipeline, exponent pipeline, interval
// evaluation and control, and an off-path CRT normalization engine; the
// operation set (multiply, synchronised add, MAC with accumulator modes,
// single reconstruction at the end); threshold-driven normalization of the
// index selected by the reduction tree.  The operation encoding, the job
// arbitration and tagging, the freeze during exclusive jobs and the sizes
// (8 accumulators as in the figure's array, tau = 2^60, s = 16) are this
// design's choices.
module hrfna_top
  import hrfna_pkg::*;
#(
  parameter int NACC     = 8,
  parameter int TAU_LOG2 = 60,
  parameter int SCALE_S  = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // operand stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  op_e                     in_op,
  input  hnum_t                   in_x,
  input  hnum_t                   in_y,
  input  logic [$clog2(NACC)-1:0] in_acc,
  // result stream
  output logic                    out_valid,
  output op_e                     out_op,
  output logic [$clog2(NACC)-1:0] out_acc,
  output hnum_t                   out_z,
  output sint_t                   out_n,
  // events and status
  output logic                    evt_norm,
  output logic                    evt_sync,
  output logic                    evt_stall,
  output logic                    exp_ovf
);

  localparam int AW = $clog2(NACC);

  localparam int TW = AW + 1;          // normalizer tag: {streamed, accumulator}
  localparam int IFW = 4;              // in-flight counter, holds 0..LAT

  typedef enum logic [1:0] {J_NORM, J_SYNC_ACC, J_READ, J_SYNC_S0} job_e;

  // ------------------------------------------------------------------
  // S0: operand register
  // ------------------------------------------------------------------
  logic          s0_v;
  op_e           s0_op;
  hnum_t         s0_x, s0_y;
  logic [AW-1:0] s0_a;

  logic frz;
  logic s0_needsync, s0_go;
  logic sync_needed, sync_x_lower;
  logic [SHW-1:0] sync_delta;

  // ------------------------------------------------------------------
  // residue and exponent pipelines
  // ------------------------------------------------------------------
  ch_op_e s0_chop;
  assign s0_chop = (s0_op == OP_ADD) ? CH_ADD : CH_MUL;

  logic  rp_v;
  rvec_t rp_z;
  exp_t  ep_fz;
  logic  ep_ovf;

  residue_pipeline u_rp (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (!frz),
    .in_valid (s0_go),
    .op       (s0_chop),
    .a        (s0_x.r),
    .b        (s0_y.r),
    .out_valid(rp_v),
    .z        (rp_z)
  );

  exponent_pipeline u_ep (
    .clk         (clk),
    .rst_n       (rst_n),
    .en          (!frz),
    .op          (s0_chop),
    .fx          (s0_x.f),
    .fy          (s0_y.f),
    .fz          (ep_fz),
    .ovf         (ep_ovf),
    .sync_needed (sync_needed),
    .sync_x_lower(sync_x_lower),
    .sync_delta  (sync_delta)
  );

  assign s0_needsync = s0_v && (s0_op == OP_ADD) && sync_needed;
  assign s0_go       = s0_v && !s0_needsync && !frz;
  assign in_ready    = !frz && (!s0_v || !s0_needsync);
  assign evt_stall   = in_valid && !in_ready;

  // sideband travelling with the pipelines (same latency, same stall)
  op_e           sb_op [2];
  logic [AW-1:0] sb_a  [2];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) begin
        sb_op[i] <= OP_MUL;
        sb_a[i]  <= '0;
      end
    end else if (!frz) begin
      sb_op[0] <= s0_op;  sb_a[0] <= s0_a;
      sb_op[1] <= sb_op[0];  sb_a[1] <= sb_a[0];
    end
  end

  // ------------------------------------------------------------------
  // accumulators and monitor
  // ------------------------------------------------------------------
  logic          acc_en, accb_en, wr_en;
  logic [AW-1:0] acc_idx, accb_idx, wr_idx;
  rvec_t         acc_r, accb_r;
  hnum_t         wr_val;
  hnum_t         a_acc;
  hnum_t [NACC-1:0] vals;

  logic          mon_req, mon_flush;
  logic [AW-1:0] mon_idx;
  ival_t         mon_iv;

  // ------------------------------------------------------------------
  // stage A
  // ------------------------------------------------------------------
  logic          p_v;
  op_e           p_op;
  logic [AW-1:0] p_a;
  rvec_t         p_r;
  exp_t          p_f;
  logic          a_done;
  logic          a_excl, a_stream, a_wait;
  logic [EW:0]   a_diff;
  logic [SHW-1:0] a_delta;

  assign p_v  = rp_v;
  assign p_op = sb_op[1];
  assign p_a  = sb_a[1];
  assign p_r  = rp_z;
  assign p_f  = ep_fz;

  acc_array #(.N(NACC)) u_acc (
    .clk    (clk),
    .rst_n  (rst_n),
    .acc_en (acc_en),
    .acc_idx(acc_idx),
    .acc_r  (acc_r),
    .accb_en (accb_en),
    .accb_idx(accb_idx),
    .accb_r  (accb_r),
    .wr_en  (wr_en),
    .wr_idx (wr_idx),
    .wr_val (wr_val),
    .rd_idx (p_a),
    .rd_val (a_acc),
    .vals   (vals)
  );

  magnitude_monitor #(.N(NACC), .TAU_LOG2(TAU_LOG2)) u_mon (
    .clk    (clk),
    .rst_n  (rst_n),
    .flush  (mon_flush),
    .vals   (vals),
    .req    (mon_req),
    .req_idx(mon_idx),
    .max_iv (mon_iv)
  );

  always_comb begin
    a_diff = (EW+1)'(p_f) - (EW+1)'(a_acc.f);
    if (a_diff[EW]) a_diff = -a_diff;
    a_delta = (a_diff > (EW+1)'((1 << SHW) - 1)) ? '1 : SHW'(a_diff);
  end

  // exclusive job needed by stage A; streamed product synchronisation;
  // LOAD waiting for in-flight products to land
  logic [IFW-1:0] inflight;
  assign a_excl   = p_v && (((p_op == OP_MAC) && (p_f > a_acc.f)) ||
                            ((p_op == OP_READ) && !a_done));
  assign a_stream = p_v && (p_op == OP_MAC) && (p_f < a_acc.f);
  assign a_wait   = p_v && (p_op == OP_LOAD) && (inflight != '0);

  // ------------------------------------------------------------------
  // normalization engine and job control
  // ------------------------------------------------------------------
  logic           job_busy, job_start, job_done;
  job_e           job_kind, job_kind_d;
  logic [AW-1:0]  job_idx, job_idx_d;
  rvec_t          nz_in_r;
  exp_t           nz_in_f;
  logic [SHW-1:0] nz_in_sh;
  rvec_t          nz_r;
  exp_t           nz_f;
  sint_t          nz_n, nz_ns;

  logic           nz_in_v, nz_ov;
  logic [TW-1:0]  nz_in_tag, nz_tag;
  logic           a_retire, strm_issue, strm_ret;

  always_comb begin
    job_start  = 1'b0;
    job_kind_d = J_NORM;
    job_idx_d  = '0;
    nz_in_r    = '0;
    nz_in_f    = '0;
    nz_in_sh   = '0;
    if (!job_busy && inflight == '0) begin
      if (a_excl) begin
        job_start = 1'b1;
        job_idx_d = p_a;
        if (p_op == OP_READ) begin
          job_kind_d = J_READ;
          nz_in_r    = a_acc.r;
          nz_in_f    = a_acc.f;
          nz_in_sh   = '0;
        end else begin
          job_kind_d = J_SYNC_ACC;
          nz_in_r    = a_acc.r;
          nz_in_f    = a_acc.f;
          nz_in_sh   = a_delta;
        end
      end else if (mon_req) begin
        job_start  = 1'b1;
        job_kind_d = J_NORM;
        job_idx_d  = mon_idx;
        nz_in_r    = vals[mon_idx].r;
        nz_in_f    = vals[mon_idx].f;
        nz_in_sh   = SHW'(SCALE_S);
      end else if (s0_needsync) begin
        job_start  = 1'b1;
        job_kind_d = J_SYNC_S0;
        if (sync_x_lower) begin
          nz_in_r = s0_x.r;
          nz_in_f = s0_x.f;
        end else begin
          nz_in_r = s0_y.r;
          nz_in_f = s0_y.f;
        end
        nz_in_sh = sync_delta;
      end
    end
    // A streamed product synchronisation is issued only when stage A retires,
    // which excludes a job start in the same cycle.
    if (strm_issue) begin
      nz_in_r  = p_r;
      nz_in_f  = p_f;
      nz_in_sh = a_delta;
    end
  end

  // A pending monitor request also freezes, so that in-flight products drain
  // and the normalization cannot be starved by a stream of them.
  assign frz        = job_busy || job_start || a_excl || mon_req || a_wait;
  assign a_retire   = p_v && !frz;
  assign strm_issue = a_retire && a_stream;
  assign nz_in_v    = job_start || strm_issue;
  assign nz_in_tag  = strm_issue ? {1'b1, p_a} : {1'b0, job_idx_d};

  crt_normalizer #(.TAG_W(TW)) u_nz (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (nz_in_v),
    .in_r     (nz_in_r),
    .in_f     (nz_in_f),
    .in_sh    (nz_in_sh),
    .in_tag   (nz_in_tag),
    .out_valid(nz_ov),
    .out_tag  (nz_tag),
    .out_r    (nz_r),
    .out_f    (nz_f),
    .out_n    (nz_n),
    .out_ns   (nz_ns)
  );

  assign strm_ret = nz_ov && nz_tag[TW-1];
  assign job_done = job_busy && nz_ov && !nz_tag[TW-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      job_busy <= 1'b0;
      job_kind <= J_NORM;
      job_idx  <= '0;
      inflight <= '0;
    end else begin
      if (job_start) begin
        job_busy <= 1'b1;
        job_kind <= job_kind_d;
        job_idx  <= job_idx_d;
      end else if (job_done) begin
        job_busy <= 1'b0;
      end
      inflight <= inflight + IFW'(strm_issue) - IFW'(strm_ret);
    end
  end

  // ------------------------------------------------------------------
  // S0 register update (accept, advance, synchronised operand write-back)
  // ------------------------------------------------------------------
  logic s0_lower_is_x;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s0_v  <= 1'b0;
      s0_op <= OP_MUL;
      s0_x  <= '0;
      s0_y  <= '0;
      s0_a  <= '0;
      s0_lower_is_x <= 1'b0;
    end else begin
      if (job_start && job_kind_d == J_SYNC_S0) s0_lower_is_x <= sync_x_lower;
      if (job_done && job_kind == J_SYNC_S0) begin
        if (s0_lower_is_x) s0_x <= {nz_r, nz_f};
        else               s0_y <= {nz_r, nz_f};
      end else if (in_valid && in_ready) begin
        s0_v  <= 1'b1;
        s0_op <= in_op;
        s0_x  <= in_x;
        s0_y  <= (in_op == OP_LOAD) ? hnum_t'({rvec_one(), exp_t'(0)}) : in_y;
        s0_a  <= in_acc;
      end else if (s0_go) begin
        s0_v  <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // stage A retirement, accumulator writes, outputs
  // ------------------------------------------------------------------
  always_comb begin
    acc_en    = 1'b0;
    acc_idx   = p_a;
    acc_r     = p_r;
    wr_en     = 1'b0;
    wr_idx    = p_a;
    wr_val    = {p_r, p_f};
    mon_flush = 1'b0;
    accb_en   = strm_ret;
    accb_idx  = nz_tag[AW-1:0];
    accb_r    = nz_r;
    if (job_done && (job_kind == J_NORM || job_kind == J_SYNC_ACC)) begin
      wr_en     = 1'b1;
      wr_idx    = job_idx;
      wr_val    = {nz_r, nz_f};
      mon_flush = 1'b1;
    end else if (a_retire) begin
      if (p_op == OP_MAC && !a_stream) acc_en = 1'b1;
      if (p_op == OP_LOAD) begin
        wr_en     = 1'b1;
        mon_flush = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_done  <= 1'b0;
      exp_ovf <= 1'b0;
    end else begin
      if (job_done && job_kind == J_READ) a_done <= 1'b1;
      else if (a_retire)                  a_done <= 1'b0;
      if (a_retire && ep_ovf && (p_op != OP_READ)) exp_ovf <= 1'b1;
    end
  end

  always_comb begin
    out_valid = 1'b0;
    out_op    = p_op;
    out_acc   = p_a;
    out_z     = {p_r, p_f};
    out_n     = '0;
    if (job_done && job_kind == J_READ) begin
      out_valid = 1'b1;
      out_op    = OP_READ;
      out_acc   = job_idx;
      out_z     = {nz_r, nz_f};
      out_n     = nz_n;
    end else if (a_retire && (p_op == OP_MUL || p_op == OP_ADD)) begin
      out_valid = 1'b1;
    end
  end

  assign evt_norm = job_done && (job_kind == J_NORM);
  assign evt_sync = (job_done && (job_kind == J_SYNC_ACC || job_kind == J_SYNC_S0)) ||
                    strm_ret;

  // Handshake rules
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             (in_valid && !in_ready) |=> in_valid)
    else $error("hrfna_top: in_valid dropped while stalled");
  a_one_job: assert property (@(posedge clk) disable iff (!rst_n)
                              job_start |-> (!job_busy && inflight == '0));
  a_no_mix: assert property (@(posedge clk) disable iff (!rst_n)
                             !(job_start && strm_issue));
  a_ret_exp: assert property (@(posedge clk) disable iff (!rst_n)
                              strm_ret |-> (nz_f <= vals[nz_tag[AW-1:0]].f))
    else $error("hrfna_top: streamed product returned above the accumulator exponent");

endmodule
