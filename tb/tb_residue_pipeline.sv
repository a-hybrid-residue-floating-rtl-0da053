// tb_residue_pipeline -- self-checking test of the K-channel residue pipeline.
// Random residue vectors, random add/multiply, random bubbles and stalls; a
// scoreboard holds the expected vector computed with % per modulus and checks
// every out_valid result in order, and that results appear exactly two
// enabled cycles after they were issued.
module tb_residue_pipeline;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ch_op_e op;
  rvec_t a, b, z;

  residue_pipeline dut (.clk, .rst_n, .en, .in_valid, .op, .a, .b, .out_valid, .z);

  rvec_t exp_q [$];
  int    tag_q [$];
  int    en_cycles = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en) en_cycles++;

  initial begin
    op = CH_ADD; a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // check what came out on the last edge
      if (out_valid && en) begin
        rvec_t e;
        int t;
        e = exp_q.pop_front();
        t = tag_q.pop_front();
        checks++;
        if (z !== e || en_cycles - t != 2) begin
          failures++;
          if (failures < 10) $display("mismatch n=%0d lat=%0d", n, en_cycles - t);
        end
      end
      en       = ($urandom_range(9, 0) != 0);
      in_valid = ($urandom_range(3, 0) != 0);
      op       = ($urandom_range(1, 0) == 1) ? CH_MUL : CH_ADD;
      for (int i = 0; i < K; i++) begin
        a[i] = res_t'($urandom_range(MODULI[i] - 1, 0));
        b[i] = res_t'($urandom_range(MODULI[i] - 1, 0));
      end
      if (in_valid && en) begin
        rvec_t e;
        for (int i = 0; i < K; i++)
          e[i] = (op == CH_MUL) ? res_t'((32'(a[i]) * 32'(b[i])) % MODULI[i])
                                : res_t'((32'(a[i]) + 32'(b[i])) % MODULI[i]);
        exp_q.push_back(e);
        tag_q.push_back(en_cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
