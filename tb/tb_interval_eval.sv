// tb_interval_eval -- self-checking test of the interval evaluation.
// Signed integers of many magnitudes (zero, tiny, mid-range, close to M/2,
// both signs) are encoded into residues by the reference package; two cycles
// later the float interval must contain |N|/M (conservative) and be tight: its
// width may not exceed 2K units of 2^-FW plus the mantissa rounding.
module tb_interval_eval;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  rvec_t r;
  ival_t iv;

  interval_eval dut (.clk, .rst_n, .en(1'b1), .r, .iv);

  real exp_q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t M, n;
    M = ref_M();
    r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      if (k >= 2) begin
        real ex, lo, hi, tol;
        ex  = exp_q.pop_front();
        lo  = fpm_to_real(iv.lo);
        hi  = fpm_to_real(iv.hi);
        tol = real'(2 * K) / 4294967296.0 + hi / 4194304.0;
        checks++;
        if (!(lo <= ex * (1.0 + 1e-12) && hi >= ex * (1.0 - 1e-12) && (hi - lo) <= tol)) begin
          failures++;
          if (failures < 10) $display("k=%0d exact=%.15e lo=%.15e hi=%.15e", k, ex, lo, hi);
        end
      end
      case (k % 6)
        0: n = rand_big($urandom_range(20, 0));
        1: n = rand_big($urandom_range(63, 20));
        2: n = (M / 2) - 1 - big_t'($urandom_range(1000, 0));
        3: n = -(M / 2) + big_t'($urandom_range(1000, 0));
        4: n = rand_big(60) + ((big_t'(1) <<< 60) * big_t'($urandom_range(15, 0)));
        default: n = rand_big($urandom_range(64, 1));
      endcase
      if (n >= M / 2) n = M / 2 - 1;
      if (n < -(M / 2)) n = -(M / 2);
      r = enc(n);
      exp_q.push_back(big_to_real(n < 0 ? -n : n) / big_to_real(M));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
