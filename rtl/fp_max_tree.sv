// fp_max_tree -- reduction tree of floating-point max comparators.
//
// N candidate intervals enter at the leaves together with their implicit
// index (the leaf position).  Every node keeps the child whose interval upper
// bound f_max is larger (ties go to the left, lower-index child) and passes on
// both that interval and its index, so the root delivers the largest estimated
// magnitude and the index of the residue vector it belongs to.  Comparison of
// two positive small floats is a single unsigned compare of {exponent,
// mantissa}.
//
// Timing: every tree level is registered, so the result appears log2(N)
// enabled cycles after the leaves were sampled; a valid bit travels along.
// N must be a power of two.
//
// From the paper: pairwise comparisons arranged hierarchically with
// logarithmic depth, each node carrying [f_min, f_max] and idx; eight leaves
// as drawn in the figure.  Comparing by the upper bound, the tie rule and one
// register per level are this design's choices.
module fp_max_tree
  import hrfna_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  ival_t [N-1:0]           leaf,
  output logic                    out_valid,
  output ival_t                   max_iv,
  output logic [$clog2(N)-1:0]    max_idx
);

  localparam int L  = $clog2(N);
  localparam int IW = (L > 0) ? L : 1;

  initial assert ((1 << L) == N) else $fatal(1, "fp_max_tree: N must be a power of two");

  // level l holds N >> l nodes; level 0 are the (unregistered) leaves
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    ival_t         iv [N >> l];
    logic [IW-1:0] ix [N >> l];
    if (l == 0) begin : g_leaf
      for (genvar j = 0; j < N; j++) begin : g_j
        assign iv[j] = leaf[j];
        assign ix[j] = IW'(j);
      end
    end else begin : g_red
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int j = 0; j < (N >> l); j++) begin
            iv[j] <= '0;
            ix[j] <= '0;
          end
        end else if (en) begin
          for (int j = 0; j < (N >> l); j++) begin
            if (g_lvl[l-1].iv[2*j+1].hi > g_lvl[l-1].iv[2*j].hi) begin
              iv[j] <= g_lvl[l-1].iv[2*j+1];
              ix[j] <= g_lvl[l-1].ix[2*j+1];
            end else begin
              iv[j] <= g_lvl[l-1].iv[2*j];
              ix[j] <= g_lvl[l-1].ix[2*j];
            end
          end
        end
      end
    end
  end

  logic [L-1:0] vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n)  vld_q <= '0;
    else if (en) vld_q <= L'({vld_q, in_valid});
  end

  assign out_valid = vld_q[L-1];
  assign max_iv    = g_lvl[L].iv[0];
  assign max_idx   = g_lvl[L].ix[0][$clog2(N)-1:0];

endmodule
