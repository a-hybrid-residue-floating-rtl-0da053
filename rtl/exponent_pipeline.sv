// exponent_pipeline -- the integer pipeline that runs beside the residue
// pipeline and produces the exponent f_Z of each result.
//
// Two "Int Arithmetic" stages, latency 2 (the same as residue_pipeline, so
// r_Z and f_Z leave together):
//   stage 1  multiplication: f_X + f_Y computed one bit wider;
//            addition: f_X (the operands are already synchronised)
//   stage 2  range check: a sum outside the signed EW-bit range saturates
//            and raises ovf for that result
// Beside the stages, a combinational synchronisation check looks at the
// incoming pair: sync_needed when f_X != f_Y, sync_x_lower telling which
// operand has the lower exponent, and sync_delta = |f_X - f_Y| clamped to the
// largest shift the normalization engine takes.  The caller uses it to route
// the lower-exponent operand through scaling before an addition.
//
// From the paper: f_Z = f_X + f_Y for multiplication, a common exponent for
// addition reached by scaling the lower-exponent operand by 2^-delta.
// Saturation with an overflow flag is this design's choice (the paper does not
// say what happens when the exponent leaves its range).
module exponent_pipeline
  import hrfna_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  ch_op_e          op,
  input  exp_t            fx,
  input  exp_t            fy,
  output exp_t            fz,
  output logic            ovf,
  output logic            sync_needed,
  output logic            sync_x_lower,
  output logic [SHW-1:0]  sync_delta
);

  localparam logic signed [EW:0] EMAX = (EW+1)'((1 <<< (EW-1)) - 1);
  localparam logic signed [EW:0] EMIN = -(EW+1)'(1 <<< (EW-1));

  logic signed [EW:0] s1_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_q <= '0;
      fz   <= '0;
      ovf  <= 1'b0;
    end else if (en) begin
      if (op == CH_MUL) s1_q <= (EW+1)'(fx) + (EW+1)'(fy);
      else              s1_q <= (EW+1)'(fx);
      if (s1_q > EMAX) begin
        fz  <= exp_t'(EMAX);
        ovf <= 1'b1;
      end else if (s1_q < EMIN) begin
        fz  <= exp_t'(EMIN);
        ovf <= 1'b1;
      end else begin
        fz  <= exp_t'(s1_q);
        ovf <= 1'b0;
      end
    end
  end

  // Exponent synchronisation check (combinational).
  logic signed [EW:0] diff;
  always_comb begin
    diff         = (EW+1)'(fx) - (EW+1)'(fy);
    sync_needed  = (fx != fy);
    sync_x_lower = diff < 0;
    if (diff < 0) diff = -diff;
    if (diff > (EW+1)'((1 << SHW) - 1)) sync_delta = '1;
    else                                sync_delta = SHW'(diff);
  end

endmodule
