// tb_fp_max_tree -- self-checking test of the FP max reduction tree (N = 8).
// Random intervals, with frequent equal exponents and ties, are applied every
// cycle; log2(N) = 3 cycles later the root must hold the interval with the
// largest upper bound and, among equal ones, the lowest index.  out_valid is
// checked to follow in_valid with the same latency.
module tb_fp_max_tree;
  import hrfna_pkg::*;

  localparam int N = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ival_t [N-1:0] leaf;
  ival_t max_iv;
  logic [2:0] max_idx;

  fp_max_tree #(.N(N)) dut (.clk, .rst_n, .en(1'b1), .in_valid, .leaf, .out_valid, .max_iv, .max_idx);

  int    ei [$];
  ival_t ev [$];
  logic  evv [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    leaf = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int best;
      @(negedge clk);
      if (k >= 3) begin
        int bi; ival_t bv; logic bvv;
        bi = ei.pop_front(); bv = ev.pop_front(); bvv = evv.pop_front();
        checks++;
        if (int'(max_idx) != bi || max_iv != bv || out_valid != bvv) begin
          failures++;
          if (failures < 10) $display("k=%0d idx=%0d exp=%0d", k, max_idx, bi);
        end
      end
      in_valid = ($urandom_range(3, 0) != 0);
      for (int j = 0; j < N; j++) begin
        leaf[j].hi.e = FEW'($urandom_range(4, 0) + 28);
        leaf[j].hi.m = (k % 3 == 0) ? MANT_W'(24'h800000) : MANT_W'($urandom_range(3, 0) << 22);
        leaf[j].hi.m[MANT_W-1] = 1'b1;
        leaf[j].lo.e = FEW'($urandom_range(20, 0));
        leaf[j].lo.m = MANT_W'($urandom);
      end
      if (k % 17 == 0) leaf = '0;
      best = 0;
      for (int j = 1; j < N; j++) if (leaf[j].hi > leaf[best].hi) best = j;
      ei.push_back(best); ev.push_back(leaf[best]); evv.push_back(in_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
