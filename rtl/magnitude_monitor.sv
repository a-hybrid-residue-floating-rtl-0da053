// magnitude_monitor -- interval evaluation and normalization control.
//
// Watches all N stored hybrid values.  Every cycle each value goes through an
// interval_eval unit (conservative float interval of |N_j|/M); the N
// intervals enter an fp_max_tree that returns the largest upper bound and its
// index; a final comparator checks that upper bound against the threshold
// tau = 2^TAU_LOG2 (expressed as tau/M) and raises req with req_idx when it is
// reached.  The whole path is a free-running pipeline of
// LAT = 2 + log2(N) + 1 cycles; its result is always about values as they were
// LAT cycles earlier.
//
// flush: when the caller rewrites a value (normalization write-back, load),
// the estimates still in flight describe the old contents.  flush clears the
// valid bits of the pipeline, and req stays low until LAT cycles of fresh
// estimates have passed.  This keeps one normalization from being repeated on
// a stale estimate.
//
// From the paper: interval estimate and index per value, reduction tree of FP
// comparators selecting the maximum, threshold comparison raising a
// normalization request and forwarding the index.  The flush mechanism, the
// use of the upper bound in the threshold test and the power-of-two tau are
// this design's choices.
module magnitude_monitor
  import hrfna_pkg::*;
#(
  parameter int N        = 8,
  parameter int TAU_LOG2 = 60
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  hnum_t [N-1:0]        vals,
  output logic                 req,
  output logic [$clog2(N)-1:0] req_idx,
  output ival_t                max_iv
);

  localparam int   IE_LAT = 2;
  localparam fpm_t TAU    = tau_fpm(TAU_LOG2);

  ival_t [N-1:0] ivs;
  logic [IE_LAT-1:0] ie_vld_q;

  for (genvar j = 0; j < N; j++) begin : g_ie
    interval_eval u_ie (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (1'b1),
      .r    (vals[j].r),
      .iv   (ivs[j])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n || flush) ie_vld_q <= '0;
    else                 ie_vld_q <= IE_LAT'({ie_vld_q, 1'b1});
  end

  logic                 t_vld;
  ival_t                t_iv;
  logic [$clog2(N)-1:0] t_idx;

  fp_max_tree #(.N(N)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n && !flush),
    .en       (1'b1),
    .in_valid (ie_vld_q[IE_LAT-1]),
    .leaf     (ivs),
    .out_valid(t_vld),
    .max_iv   (t_iv),
    .max_idx  (t_idx)
  );

  // threshold comparison
  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      req     <= 1'b0;
      req_idx <= '0;
      max_iv  <= '0;
    end else begin
      req     <= t_vld && (t_iv.hi >= TAU);
      req_idx <= t_idx;
      max_iv  <= t_iv;
    end
  end

endmodule
