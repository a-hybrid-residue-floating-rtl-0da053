// tb_hrfna_top -- end-to-end test of the HRFNA unit at its default size
// (8 accumulators, tau = 2^60, s = 16).
//
// Phases, each checked against exact integer arithmetic from hrfna_tb_pkg:
//   1 MUL   random products, exact residues and f_X + f_Y; result latency;
//           an exponent sum beyond the range must saturate and set exp_ovf
//   2 ADD   equal exponents (no synchronisation) and unequal exponents (lower
//           operand floor-scaled by 2^-delta first), exact result
//   3 MATMUL an 8x8 by 8x8 product, one row at a time with the eight
//           accumulators as the eight columns (LOAD, 64 interleaved MACs,
//           8 READs), exact since no normalization is reached
//   4 RATE  2048 back-to-back MACs with coherent exponents: one accepted per
//           cycle (initiation interval 1)
//   5 DOT   hybrid dot products (Algorithm of the design: LOAD, MAC stream,
//           READ) of growing length with large positive products, so the
//           magnitude monitor must trigger threshold normalization, and with a
//           start exponent below the product exponent, so the accumulator and
//           later the products go through exponent synchronisation.  The
//           read value must lie within (events) * 2^f_final of the exact sum,
//           and the MAC stream must keep about one MAC per cycle (products
//           synchronised in a stream; only normalizations cost cycles).
// Every mechanism (MUL, ADD bypass, ADD synchronisation, MAC accumulate,
// accumulator-side and product-side synchronisation, threshold normalization,
// stall, read-out, exponent saturation) is counted and must occur.
module tb_hrfna_top;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(negedge clk) cycle++;   // stable at every rising edge

  logic in_valid = 0, in_ready, out_valid;
  op_e in_op, out_op;
  hnum_t in_x, in_y, out_z;
  logic [2:0] in_acc, out_acc;
  sint_t out_n;
  logic evt_norm, evt_sync, evt_stall, exp_ovf;

  hrfna_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_op, .in_x, .in_y, .in_acc,
                 .out_valid, .out_op, .out_acc, .out_z, .out_n,
                 .evt_norm, .evt_sync, .evt_stall, .exp_ovf);

  // ---------------- event counters ----------------
  int n_norm = 0, n_sync = 0, n_stall = 0, n_read = 0, n_mul = 0, n_add_bypass = 0,
      n_add_sync = 0, n_mac = 0, n_sync_acc = 0, n_sync_p = 0;
  int seg_events = 0;
  always @(posedge clk) if (rst_n) begin
    if (evt_norm)  begin n_norm++;  seg_events++; end
    if (evt_sync)  begin n_sync++;  seg_events++; end
    if (evt_stall) n_stall++;
    if (dut.job_done && dut.job_kind == dut.J_SYNC_ACC) n_sync_acc++;
    if (dut.strm_ret) n_sync_p++;
    if (dut.job_done && dut.job_kind == dut.J_SYNC_S0)  n_add_sync++;
    if (in_valid && in_ready && in_op == OP_MAC) n_mac++;
  end

  // ---------------- expected results ----------------
  typedef struct {
    op_e   op;
    int    acc;
    hnum_t z;        // exact expectation (MUL/ADD)
    big_t  exact;    // READ: exact value in units of 2^fbase
    int    fbase;
    longint t_issue;
  } exp_t_rec;
  exp_t_rec expq [$];
  int n_out = 0;
  real worst_rel = 0.0;

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t_rec e;
    n_out++;
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      e = expq.pop_front();
      if (out_op != e.op) begin
        failures++;
        $display("op mismatch got %0d exp %0d", out_op, e.op);
      end else if (e.op == OP_READ) begin
        big_t got, err, bound;
        int   fo;
        n_read++;
        fo  = int'(out_z.f);
        got = big_t'(out_n) <<< (fo - e.fbase);
        err = got - e.exact;
        if (err < 0) err = -err;
        bound = big_t'(seg_events) <<< (fo - e.fbase);
        if (int'(out_acc) != e.acc || err > bound || big_t'(out_n) != dec(out_z.r)) begin
          failures++;
          $display("READ acc %0d: got %0d*2^%0d exact %0d*2^%0d err %0d bound %0d",
                   out_acc, out_n, fo, e.exact, e.fbase, err, bound);
        end
        if (e.exact != 0) begin
          real rel;
          rel = big_to_real(err) / big_to_real(e.exact < 0 ? -e.exact : e.exact);
          if (rel > worst_rel) worst_rel = rel;
        end
      end else begin
        if (out_z !== e.z) begin
          failures++;
          $display("%0d result mismatch: got f=%0d N=%0d exp f=%0d N=%0d", e.op,
                   out_z.f, dec(out_z.r), e.z.f, dec(e.z.r));
        end
        if (e.op == OP_MUL && e.t_issue >= 0) begin
          checks++;
          if (cycle - e.t_issue != 3) begin
            failures++;
            $display("MUL latency %0d", cycle - e.t_issue);
          end
        end
      end
    end
  end

  // ---------------- driver ----------------
  longint t_acc;
  task automatic issue(input op_e op, input hnum_t x, input hnum_t y, input int a);
    @(negedge clk);
    in_valid = 1; in_op = op; in_x = x; in_y = y; in_acc = 3'(a);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    t_acc = cycle;
    @(negedge clk);
    in_valid = 0;
  endtask

  // back-to-back issue without releasing in_valid between operations
  task automatic issue_bb(input op_e op, input hnum_t x, input hnum_t y, input int a);
    in_valid = 1; in_op = op; in_x = x; in_y = y; in_acc = 3'(a);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    t_acc = cycle;
    #1;
  endtask

  function automatic hnum_t hn(input big_t n, input int f);
    hnum_t h;
    h.r = enc(n);
    h.f = exp_t'(f);
    return h;
  endfunction

  task automatic expect_val(input op_e op, input hnum_t z, input longint t);
    exp_t_rec e;
    e.op = op; e.acc = 0; e.z = z; e.exact = 0; e.fbase = 0; e.t_issue = t;
    expq.push_back(e);
  endtask

  task automatic expect_read(input int a, input big_t exact, input int fbase);
    exp_t_rec e;
    e.op = OP_READ; e.acc = a; e.z = '0; e.exact = exact; e.fbase = fbase; e.t_issue = -1;
    expq.push_back(e);
  endtask

  task automatic drain();
    int guard = 0;
    while (expq.size() != 0 && guard < 5000) begin @(posedge clk); guard++; end
    repeat (2) @(posedge clk);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    big_t nx, ny, nz;
    int fx, fy;
    hnum_t zero;
    zero = hn(0, 0);
    in_op = OP_MUL; in_x = zero; in_y = zero; in_acc = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    // ---- 1 MUL ----
    for (int k = 0; k < 200; k++) begin
      nx = rand_big($urandom_range(31, 0));
      ny = rand_big($urandom_range(31, 0));
      fx = $urandom_range(100, 0) - 50;
      fy = $urandom_range(100, 0) - 50;
      issue(OP_MUL, hn(nx, fx), hn(ny, fy), 0);
      expect_val(OP_MUL, hn(nx * ny, fx + fy), t_acc);
      n_mul++;
    end
    // exponent saturation
    issue(OP_MUL, hn(3, 400), hn(5, 400), 0);
    expect_val(OP_MUL, hn(15, (1 << (EW - 1)) - 1), -1);
    drain();
    checks++;
    if (!exp_ovf) begin failures++; $display("exp_ovf not set"); end

    // ---- 2 ADD ----
    for (int k = 0; k < 200; k++) begin
      nx = rand_big($urandom_range(50, 0));
      ny = rand_big($urandom_range(50, 0));
      fx = $urandom_range(40, 0) - 20;
      fy = (k % 2 == 0) ? fx : $urandom_range(40, 0) - 20;
      if (fx == fy) n_add_bypass++;
      issue(OP_ADD, hn(nx, fx), hn(ny, fy), 0);
      if (fx >= fy) nz = nx + floor_shift(ny, fx - fy);
      else          nz = floor_shift(nx, fy - fx) + ny;
      expect_val(OP_ADD, hn(nz, (fx > fy) ? fx : fy), -1);
    end
    drain();

    // ---- 3 MATMUL 8x8 ----
    begin
      big_t A [8][8], B [8][8], C;
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          A[i][j] = rand_big(24);
          B[i][j] = rand_big(24);
        end
      seg_events = 0;
      for (int i = 0; i < 8; i++) begin
        for (int j = 0; j < 8; j++) issue_bb(OP_LOAD, hn(0, -4), zero, j);
        for (int k = 0; k < 8; k++)
          for (int j = 0; j < 8; j++) issue_bb(OP_MAC, hn(A[i][k], -2), hn(B[k][j], -2), j);
        for (int j = 0; j < 8; j++) begin
          C = 0;
          for (int k = 0; k < 8; k++) C = C + A[i][k] * B[k][j];
          issue_bb(OP_READ, zero, zero, j);
          expect_read(j, C, -4);
        end
      end
      @(negedge clk);
      in_valid = 0;
      drain();
      checks++;
      if (seg_events != 0) begin failures++; $display("matmul needed %0d jobs", seg_events); end
    end

    // ---- 4 RATE: II = 1 ----
    begin
      longint t0, t1;
      big_t s [8];
      for (int j = 0; j < 8; j++) begin issue(OP_LOAD, hn(0, 0), zero, j); s[j] = 0; end
      repeat (12) @(posedge clk);
      seg_events = 0;
      @(negedge clk);
      t0 = -1;
      for (int k = 0; k < 2048; k++) begin
        nx = rand_big(20); ny = rand_big(20);
        issue_bb(OP_MAC, hn(nx, 1), hn(ny, -1), k % 8);
        s[k % 8] = s[k % 8] + nx * ny;
        if (t0 < 0) t0 = t_acc;
      end
      t1 = t_acc;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (t1 - t0 != 2047) begin failures++; $display("2048 MACs took %0d cycles", t1 - t0 + 1); end
      $display("RATE: 2048 MACs accepted in %0d cycles", t1 - t0 + 1);
      for (int j = 0; j < 8; j++) begin issue(OP_READ, zero, zero, j); expect_read(j, s[j], 0); end
      drain();
    end

    // ---- 5 DOT products with normalization and synchronisation ----
    foreach (dot_len[li]) begin
      big_t exact;
      int   fbase, f0, fp;
      longint t0;
      fbase = -6;
      f0 = -6;            // accumulator starts below the product exponent
      fp = -4;            // products: (-2) + (-2)
      seg_events = 0;
      issue(OP_LOAD, hn(777, f0), zero, 3);
      exact = big_t'(777);
      t0 = cycle;
      @(negedge clk);
      for (int k = 0; k < dot_len[li]; k++) begin
        nx = big_t'($urandom_range(32'hFFFFFF, 32'h800000));
        ny = big_t'($urandom_range(32'hFFFFFF, 32'h800000));
        if ($urandom_range(7, 0) == 0) ny = -ny;
        issue_bb(OP_MAC, hn(nx, -2), hn(ny, -2), 3);
        exact = exact + ((nx * ny) <<< (fp - fbase));
      end
      @(negedge clk);
      in_valid = 0;
      // products below the accumulator exponent are synchronised in a
      // stream, so only threshold normalizations and the one accumulator
      // synchronisation may cost cycles
      checks++;
      if (cycle - t0 > longint'(dot_len[li]) + 32 + 16 * longint'(n_norm)) begin
        failures++;
        $display("DOT length %0d: MAC stream took %0d cycles", dot_len[li], cycle - t0);
      end
      issue(OP_READ, zero, zero, 3);
      expect_read(3, exact, fbase);
      drain();
      $display("DOT length %0d: %0d cycles, %0d normalizations+synchronisations so far, worst rel err %e",
               dot_len[li], cycle - t0, n_norm + n_sync, worst_rel);
    end

    // ---- mechanism coverage ----
    $display("events: mul=%0d add_bypass=%0d add_sync=%0d mac=%0d sync_acc=%0d sync_p=%0d norm=%0d stall=%0d read=%0d ovf=%0b",
             n_mul, n_add_bypass, n_add_sync, n_mac, n_sync_acc, n_sync_p, n_norm, n_stall, n_read, exp_ovf);
    checks++; if (n_mul == 0)        failures++;
    checks++; if (n_add_bypass == 0) failures++;
    checks++; if (n_add_sync == 0)   failures++;
    checks++; if (n_mac == 0)        failures++;
    checks++; if (n_sync_acc == 0)   failures++;
    checks++; if (n_sync_p == 0)     failures++;
    checks++; if (n_norm == 0)       failures++;
    checks++; if (n_stall == 0)      failures++;
    checks++; if (n_read == 0)       failures++;
    checks++; if (n_out != 200 + 1 + 200 + 64 + 8 + 3) begin
      failures++; $display("output count %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dot_len [3] = '{1024, 16384, 65536};

endmodule
