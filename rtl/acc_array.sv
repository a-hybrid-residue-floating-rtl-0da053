// acc_array -- the array of hybrid accumulators A[0..N-1].
//
// Each entry is a hybrid number (residue vector, exponent).  Updates:
//   acc_en  A[acc_idx].r  <- A[acc_idx].r + acc_r   (residue-wise modular add,
//           exponent held: the accumulator exponent only changes by a write)
//   accb_en A[accb_idx].r <- A[accb_idx].r + accb_r (second accumulate port,
//           used for products returning from exponent synchronisation; when
//           both ports hit the same entry both terms are added)
//   wr_en   A[wr_idx]     <- wr_val                 (load, or write-back of a
//           normalized / synchronised value from the normalization engine);
//           a write excludes accumulation in the same cycle (asserted)
// All entries are visible at once on vals (for the magnitude monitor) and one
// entry is selected by rd_idx on rd_val (combinational read).
//
// Timing: updates take effect on the rising clk edge; reset clears every
// entry to (0, 0).
//
// From the paper: an array of residue vectors that the magnitude monitor scans
// and from which the selected X* is fetched by idx, and accumulation
// r_A <- r_A + r_P (mod m_i) with the exponent held.  Register storage, the
// port set and the reset value are this design's choices; the second
// accumulate port exists so that synchronised products can be added without
// a stall.
module acc_array
  import hrfna_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 acc_en,
  input  logic [$clog2(N)-1:0] acc_idx,
  input  rvec_t                acc_r,
  input  logic                 accb_en,
  input  logic [$clog2(N)-1:0] accb_idx,
  input  rvec_t                accb_r,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_idx,
  input  hnum_t                wr_val,
  input  logic [$clog2(N)-1:0] rd_idx,
  output hnum_t                rd_val,
  output hnum_t [N-1:0]        vals
);

  hnum_t a_q [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) a_q[j] <= '0;
    end else if (wr_en) begin
      a_q[wr_idx] <= wr_val;
    end else begin
      for (int j = 0; j < N; j++) begin
        for (int i = 0; i < K; i++) begin
          res_t t;
          t = a_q[j].r[i];
          if (acc_en  && acc_idx  == j[$clog2(N)-1:0]) t = mod_add(t, acc_r[i],  MODULI[i]);
          if (accb_en && accb_idx == j[$clog2(N)-1:0]) t = mod_add(t, accb_r[i], MODULI[i]);
          a_q[j].r[i] <= t;
        end
      end
    end
  end

  always_comb begin
    for (int j = 0; j < N; j++) vals[j] = a_q[j];
  end
  assign rd_val = a_q[rd_idx];

  a_one_update: assert property (@(posedge clk) disable iff (!rst_n) !((acc_en || accb_en) && wr_en))
    else $error("acc_array: accumulate and write in the same cycle");

endmodule
