// tb_exponent_pipeline -- self-checking test of the exponent pipeline.
// Random exponent pairs (including ones whose sum leaves the signed range)
// for multiplication and addition; f_Z and the overflow flag are checked two
// enabled cycles later against a saturating reference, and the combinational
// synchronisation outputs (needed, which side is lower, clamped difference)
// are checked in the same cycle.
module tb_exponent_pipeline;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0, en = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ch_op_e op;
  exp_t fx, fy, fz;
  logic ovf, sn, sxl;
  logic [SHW-1:0] sd;

  exponent_pipeline dut (.clk, .rst_n, .en, .op, .fx, .fy, .fz, .ovf,
                         .sync_needed(sn), .sync_x_lower(sxl), .sync_delta(sd));

  localparam int EMAX = (1 << (EW - 1)) - 1;
  localparam int EMIN = -(1 << (EW - 1));

  int   ez [$];
  logic eo [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = CH_ADD; fx = 0; fy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int x, y, s, d;
      @(negedge clk);
      if (n >= 2) begin
        int e; logic o;
        e = ez.pop_front(); o = eo.pop_front();
        checks++;
        if (int'(fz) != e || ovf != o) begin
          failures++;
          if (failures < 10) $display("fz mismatch n=%0d fz=%0d exp=%0d ovf=%0b", n, fz, e, ovf);
        end
      end
      x  = (n % 7 == 0) ? $urandom_range(EMAX, EMAX - 20) : $urandom_range(200, 0) - 100;
      y  = (n % 11 == 0) ? $urandom_range(EMAX, EMAX - 20) : $urandom_range(200, 0) - 100;
      if (n % 13 == 0) begin x = EMIN + 3; y = -50; end
      if (n % 5 == 0) y = x;
      op = ($urandom_range(1, 0) == 1) ? CH_MUL : CH_ADD;
      fx = exp_t'(x); fy = exp_t'(y);
      s  = (op == CH_MUL) ? x + y : x;
      ez.push_back(s > EMAX ? EMAX : (s < EMIN ? EMIN : s));
      eo.push_back(s > EMAX || s < EMIN);
      #1;
      d = (x > y) ? x - y : y - x;
      if (d > (1 << SHW) - 1) d = (1 << SHW) - 1;
      checks++;
      if (sn != (x != y) || (x != y && (sxl != (x < y) || int'(sd) != d))) begin
        failures++;
        if (failures < 10) $display("sync mismatch x=%0d y=%0d sd=%0d", x, y, sd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
