// tb_mod_arith_channel -- self-checking test of one residue channel.
// Two instances (moduli 8193 and 8192) get random additions and
// multiplications every cycle; each result is compared, exactly two enabled
// cycles later, with (a+b) % m or (a*b) % m.  A stretch with en low checks
// that the channel holds its output.
module tb_mod_arith_channel;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0, en = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ch_op_e op;
  res_t a0, b0, a1, b1, z0, z1;

  mod_arith_channel #(.MOD(8193)) dut0 (.clk, .rst_n, .en, .op, .a(a0), .b(b0), .z(z0));
  mod_arith_channel #(.MOD(8192)) dut1 (.clk, .rst_n, .en, .op, .a(a1), .b(b1), .z(z1));

  function automatic res_t ref_op(ch_op_e o, res_t a, res_t b, int m);
    return (o == CH_MUL) ? res_t'((32'(a) * 32'(b)) % m) : res_t'((32'(a) + 32'(b)) % m);
  endfunction

  res_t exp0 [$], exp1 [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = CH_ADD; a0 = 0; b0 = 0; a1 = 0; b1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // corner values first, then random
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      op = ($urandom_range(1, 0) == 1) ? CH_MUL : CH_ADD;
      if (n < 4) begin
        a0 = res_t'(8192); b0 = res_t'((n % 2) ? 8192 : 1);
        a1 = res_t'(8191); b1 = res_t'((n % 2) ? 8191 : 1);
      end else begin
        a0 = res_t'($urandom_range(8192, 0)); b0 = res_t'($urandom_range(8192, 0));
        a1 = res_t'($urandom_range(8191, 0)); b1 = res_t'($urandom_range(8191, 0));
      end
      exp0.push_back(ref_op(op, a0, b0, 8193));
      exp1.push_back(ref_op(op, a1, b1, 8192));
      @(posedge clk);
      #1;
      if (n >= 1) begin
        res_t e0, e1;
        e0 = exp0.pop_front(); e1 = exp1.pop_front();
        checks++;
        if (z0 !== e0 || z1 !== e1) begin
          failures++;
          if (failures < 10) $display("mismatch n=%0d z0=%0d exp=%0d z1=%0d exp=%0d", n, z0, e0, z1, e1);
        end
      end
    end
    // hold: with en low the output must not move
    @(negedge clk);
    en = 0;
    begin
      res_t h0;
      h0 = z0;
      repeat (5) @(posedge clk);
      #1 checks++;
      if (z0 !== h0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
