// mod_arith_channel -- one residue channel of the HRFNA residue pipeline.
//
// Computes z = (a + b) mod MOD or z = (a * b) mod MOD for one modulus of the
// residue number system.  There is no carry between channels: each modulus
// has its own copy of this unit and all copies run in lock step.
//
// Structure (two register stages, latency 2, one new operation per cycle):
//   stage 1  addition: binary adder then one conditional subtraction of MOD;
//            multiplication: full product a*b (at most 28 bits)
//   stage 2  multiplication: Barrett reduction with the precomputed constant
//            floor(2^32/MOD) and up to two correction subtractions;
//            addition: the stage-1 result is passed on, so both operations
//            leave with the same latency (channel-to-channel latency matching)
//
// Interface: en advances both stages (a global stall freezes the channel);
// op, a and b are sampled on a rising clk edge with en high, z appears two
// enabled edges later.  Operands must already be reduced (< MOD).
//
// From the paper: adder plus conditional subtraction for addition, product
// followed by reduction with precomputed constants for multiplication, full
// pipelining with matched latency.  Barrett reduction, the two-stage split
// and the synchronous active-low reset are choices of this design.
module mod_arith_channel
  import hrfna_pkg::*;
#(
  parameter int unsigned MOD = 8191
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  ch_op_e op,
  input  res_t   a,
  input  res_t   b,
  output res_t   z
);

  localparam logic [32:0] MU = barrett_mu(MOD);

  ch_op_e      op_q;
  logic [31:0] raw_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      op_q  <= CH_ADD;
      raw_q <= '0;
      z     <= '0;
    end else if (en) begin
      op_q <= op;
      if (op == CH_MUL) raw_q <= 32'(a) * 32'(b);
      else              raw_q <= 32'(mod_add(a, b, MOD));
      if (op_q == CH_MUL) z <= barrett(raw_q, MOD, MU);
      else                z <= res_t'(raw_q);
    end
  end

endmodule
