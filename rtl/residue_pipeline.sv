// residue_pipeline -- the array of K parallel residue channels.
//
// One mod_arith_channel per modulus of hrfna_pkg::MODULI works on its own
// residue of the operand vectors; all channels share the operation select and
// the stall, so the result vector r_Z leaves as a whole after LAT = 2 enabled
// cycles.  A valid bit travels alongside the data with the same latency.
//
// Interface: in_valid/op/a/b are taken on a rising edge with en high;
// out_valid/z show the result LAT enabled edges later.  With en low the
// whole pipeline holds its contents.
//
// From the paper: one carry-free modular arithmetic unit per modulus, fed by
// the residue vector, producing r_Z.  The valid bit and the shared stall are
// this design's own.
module residue_pipeline
  import hrfna_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   in_valid,
  input  ch_op_e op,
  input  rvec_t  a,
  input  rvec_t  b,
  output logic   out_valid,
  output rvec_t  z
);

  localparam int LAT = 2;

  for (genvar i = 0; i < K; i++) begin : g_ch
    mod_arith_channel #(.MOD(MODULI[i])) u_ch (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (en),
      .op   (op),
      .a    (a[i]),
      .b    (b[i]),
      .z    (z[i])
    );
  end

  logic [LAT-1:0] vld_q;
  always_ff @(posedge clk) begin
    if (!rst_n)  vld_q <= '0;
    else if (en) vld_q <= {vld_q[LAT-2:0], in_valid};
  end
  assign out_valid = vld_q[LAT-1];

endmodule
