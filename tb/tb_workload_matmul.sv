// tb_workload_matmul -- dense matrix products C = A * B of size 64x64 and
// 128x128 on the HRFNA unit at its default size.
//
// Each element of A and B is a hybrid number with a random signed 24-bit
// integer and a random exponent in -2..0, so products have exponents -4..0.
// The eight accumulators hold eight elements of one row of C at a time:
// LOAD (0, 0) into each, then for every k eight interleaved MACs
// A[i][k] * B[k][j0+c] into accumulator c, then eight READs.  Starting the
// accumulators at the highest product exponent (the initial exponent matches
// the operands) means every product with a lower exponent is scaled down on
// its way in, which the unit does as a streamed synchronisation.
//
// Checks, per element of C:
//   * the READ result lies within (events in its block) * 2^f of the exact
//     sum, which the testbench forms with wide integers in units of 2^-4;
//   * the residues on out_z decode to out_n.
// Over each matrix: the error relative to sum_k |A[i][k] B[k][j]| must have an
// RMS below 2e-6, and the number of cycles must stay close to one MAC per
// cycle: MACs plus at most 100 cycles per block of eight elements for its
// LOADs and its eight READs (each READ is an exclusive engine job of 1 + 6
// cycles, after the in-flight products have landed).
// Event counts (streamed synchronisations, exclusive jobs) are printed.
module tb_workload_matmul;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  localparam int FB = -4;          // unit of the exact sums: 2^FB

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(negedge clk) cycle++;

  logic in_valid = 0, in_ready, out_valid;
  op_e in_op, out_op;
  hnum_t in_x, in_y, out_z;
  logic [2:0] in_acc, out_acc;
  sint_t out_n;
  logic evt_norm, evt_sync, evt_stall, exp_ovf;

  hrfna_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_op, .in_x, .in_y, .in_acc,
                 .out_valid, .out_op, .out_acc, .out_z, .out_n,
                 .evt_norm, .evt_sync, .evt_stall, .exp_ovf);

  int n_norm = 0, n_sync = 0, blk_events = 0;
  always @(posedge clk) if (rst_n) begin
    if (evt_norm) begin n_norm++; blk_events++; end
    if (evt_sync) begin n_sync++; blk_events++; end
  end

  // expected READ results, in issue order
  big_t exq [$];
  big_t scq [$];
  int   acq [$];
  real  sq_sum = 0.0;
  int   n_el = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    big_t e, sc, got, err, bound;
    int fo, a;
    checks++;
    if (exq.size() == 0 || out_op != OP_READ) begin
      failures++;
      $display("unexpected output op %0d", out_op);
    end else begin
      e = exq.pop_front(); sc = scq.pop_front(); a = acq.pop_front();
      fo  = int'(out_z.f);
      got = big_t'(out_n) <<< (fo - FB);
      err = got - e;
      if (err < 0) err = -err;
      bound = big_t'(blk_events) <<< (fo - FB);
      if (int'(out_acc) != a || err > bound || big_t'(out_n) != dec(out_z.r)) begin
        failures++;
        if (failures < 10)
          $display("READ acc %0d: got %0d*2^%0d exact %0d*2^%0d err %0d bound %0d",
                   out_acc, out_n, fo, e, FB, err, bound);
      end
      if (sc != 0) begin
        real r;
        r = big_to_real(err) / big_to_real(sc);
        sq_sum += r * r;
      end
      n_el++;
    end
  end

  function automatic hnum_t hn(input big_t n, input int f);
    return {enc(n), exp_t'(f)};
  endfunction

  task automatic issue_bb(input op_e op, input hnum_t x, input hnum_t y, input int a);
    in_valid = 1; in_op = op; in_x = x; in_y = y; in_acc = 3'(a);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
  endtask

  task automatic run_matmul(input int n);
    big_t am [][], bm [][];
    int   af [][], bf [][];
    hnum_t zero;
    longint t0, macs, cyc;
    int n_el0;
    real rms;
    zero = '0;
    am = new[n]; bm = new[n]; af = new[n]; bf = new[n];
    for (int i = 0; i < n; i++) begin
      am[i] = new[n]; bm[i] = new[n]; af[i] = new[n]; bf[i] = new[n];
      for (int j = 0; j < n; j++) begin
        am[i][j] = rand_big(24);  af[i][j] = -int'($urandom_range(2, 0));
        bm[i][j] = rand_big(24);  bf[i][j] = -int'($urandom_range(2, 0));
      end
    end
    sq_sum = 0.0;
    n_el0 = n_el;
    macs = 0;
    @(negedge clk);
    t0 = cycle;
    for (int i = 0; i < n; i++)
      for (int j0 = 0; j0 < n; j0 += 8) begin
        // wait for the previous block's reads so that the error bound of a
        // block counts only its own events
        while (exq.size() != 0) @(negedge clk);
        blk_events = 0;
        for (int c = 0; c < 8; c++) issue_bb(OP_LOAD, hn(0, 0), zero, c);
        for (int k = 0; k < n; k++)
          for (int c = 0; c < 8; c++) begin
            issue_bb(OP_MAC, hn(am[i][k], af[i][k]), hn(bm[k][j0+c], bf[k][j0+c]), c);
            macs++;
          end
        for (int c = 0; c < 8; c++) begin
          big_t e, sc;
          e = 0; sc = 0;
          for (int k = 0; k < n; k++) begin
            big_t p;
            p  = am[i][k] * bm[k][j0+c];
            e  = e + (p <<< (af[i][k] + bf[k][j0+c] - FB));
            sc = sc + ((p < 0 ? -p : p) <<< (af[i][k] + bf[k][j0+c] - FB));
          end
          exq.push_back(e); scq.push_back(sc); acq.push_back(c);
          issue_bb(OP_READ, zero, zero, c);
        end
        @(negedge clk);
        in_valid = 0;
      end
    while (exq.size() != 0) @(negedge clk);
    cyc = cycle - t0;
    rms = $sqrt(sq_sum / real'(n_el - n_el0));
    $display("MATMUL %0dx%0d: %0d MACs in %0d cycles, %0d elements, RMS error %e (relative to sum |a b|), events norm=%0d sync=%0d",
             n, n, macs, cyc, n_el - n_el0, rms, n_norm, n_sync);
    checks++;
    if (n_el - n_el0 != n * n) begin failures++; $display("missing results"); end
    checks++;
    if (!(rms < 2.0e-6)) begin failures++; $display("RMS error too large"); end
    checks++;
    if (cyc > macs + longint'(n) * (longint'(n) / 64'sd8) * 100) begin
      failures++; $display("throughput below one MAC per cycle");
    end
  endtask

  initial begin
    in_op = OP_MUL; in_x = '0; in_y = '0; in_acc = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    run_matmul(64);
    run_matmul(128);
    checks++;
    if (n_sync == 0) begin failures++; $display("no exponent synchronisation happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
