// tb_magnitude_monitor -- self-checking test of interval evaluation, reduction
// and threshold comparison over 8 stored values (tau = 2^60).
// Each round loads a new set of eight signed integers, some rounds with one or
// more values above tau, others all clearly below it.  The request and index
// must describe the previous set up to cycle LAT-1 after the change and the
// new set from cycle LAT = 6 on: req high exactly when the largest |N| reaches
// tau, req_idx naming that value.  A flush must hold req low for LAT cycles.
module tb_magnitude_monitor;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  localparam int N = 8, LAT = 6;
  logic clk = 0, rst_n = 0, flush = 0, req;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  hnum_t [N-1:0] vals;
  logic [2:0] req_idx;
  ival_t max_iv;

  magnitude_monitor #(.N(N), .TAU_LOG2(60)) dut (.clk, .rst_n, .flush, .vals, .req, .req_idx, .max_iv);

  logic prev_req, cur_req;
  int   prev_idx, cur_idx;

  task automatic check(input logic er, input int ei, input string tag);
    checks++;
    if (req !== er || (er && int'(req_idx) != ei)) begin
      failures++;
      if (failures < 10) $display("%s: req=%0b idx=%0d expected req=%0b idx=%0d", tag, req, req_idx, er, ei);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t tau, v, best;
    tau = big_t'(1) <<< 60;
    vals = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (LAT + 2) @(posedge clk);
    prev_req = 0; prev_idx = 0;
    for (int round = 0; round < 300; round++) begin
      @(negedge clk);
      best = -1; cur_idx = 0;
      for (int j = 0; j < N; j++) begin
        case ($urandom_range(3, 0))
          0: v = rand_big($urandom_range(40, 0));
          1: v = rand_big(58);
          2: v = (round % 2 == 0) ? rand_big(58) : (tau + rand_big(58) + (big_t'($urandom_range(7, 1)) <<< 60));
          default: v = rand_big(59);
        endcase
        if (v < 0 && -v > tau * 7) v = -tau * 7;
        vals[j].r = enc(v);
        vals[j].f = exp_t'($urandom_range(20, 0));
        if (v < 0) v = -v;
        if (v > best) begin best = v; cur_idx = j; end
      end
      cur_req = (best >= tau);
      // cycles 1..LAT-1 after the change still show the previous set
      for (int c = 1; c < LAT; c++) begin
        @(negedge clk);
        if (c == LAT - 1) check(prev_req, prev_idx, "old");
      end
      @(negedge clk);
      check(cur_req, cur_idx, "new");
      // flush: request must disappear for LAT cycles, then come back
      if (round % 5 == 0) begin
        flush = 1;
        @(negedge clk);
        flush = 0;
        for (int c = 0; c < LAT - 1; c++) begin
          check(1'b0, 0, "flushed");
          @(negedge clk);
        end
        @(negedge clk);
        check(cur_req, cur_idx, "refilled");
      end
      prev_req = cur_req; prev_idx = cur_idx;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
