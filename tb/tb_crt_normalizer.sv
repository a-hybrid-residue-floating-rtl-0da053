// tb_crt_normalizer -- self-checking test of the CRT normalization engine.
// Random signed integers (all magnitudes, both signs, the extremes -M/2 and
// M/2-1), exponents and shift amounts 0..127 are issued back to back; exactly
// six cycles later the engine must return the job's tag, N, floor(N / 2^sh), the residues of
// the scaled value and f + sh, all computed by the reference package.
module tb_crt_normalizer;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  rvec_t in_r, out_r;
  exp_t  in_f, out_f;
  logic [SHW-1:0] in_sh;
  logic [3:0] in_tag, out_tag;
  sint_t out_n, out_ns;

  crt_normalizer dut (.clk, .rst_n, .in_valid, .in_r, .in_f, .in_sh, .in_tag,
                      .out_valid, .out_tag, .out_r, .out_f, .out_n, .out_ns);

  big_t en_q [$], ens_q [$];
  int   ef_q [$], et_q [$];
  logic ev_q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t M, n, ns;
    int f, sh;
    M = ref_M();
    in_r = '0; in_f = '0; in_sh = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (k >= 6) begin
        big_t xn, xns; int xf, xt; logic xv;
        xn = en_q.pop_front(); xns = ens_q.pop_front(); xf = ef_q.pop_front(); xv = ev_q.pop_front(); xt = et_q.pop_front();
        checks++;
        if (out_valid != xv || (xv && (big_t'(out_n) != xn || big_t'(out_ns) != xns ||
            out_r != enc(xns) || int'(out_f) != xf || int'(out_tag) != xt))) begin
          failures++;
          if (failures < 10) $display("k=%0d n=%0d exp %0d ns=%0d exp %0d f=%0d exp %0d",
                                      k, out_n, xn, out_ns, xns, out_f, xf);
        end
      end
      in_valid = ($urandom_range(4, 0) != 0);
      case (k % 5)
        0: n = M / 2 - 1;
        1: n = -(M / 2);
        default: n = rand_big($urandom_range(64, 0));
      endcase
      if (k % 5 > 1 && k % 2 == 0) n = rand_big($urandom_range(16, 0));
      if (n >= M / 2) n = M / 2 - 1;
      if (n < -(M / 2)) n = -(M / 2);
      f  = $urandom_range(200, 0) - 100;
      sh = (k % 4 == 0) ? 0 : $urandom_range(127, 0);
      if (k % 3 == 0) sh = $urandom_range(20, 1);
      in_r = enc(n); in_f = exp_t'(f); in_sh = SHW'(sh); in_tag = 4'($urandom);
      ns = floor_shift(n, sh);
      en_q.push_back(n); ens_q.push_back(ns); ef_q.push_back(f + sh); ev_q.push_back(in_valid); et_q.push_back(int'(in_tag));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
