// tb_acc_array -- self-checking test of the accumulator array (N = 8).
// Random mixes of accumulation on one or both ports (also both on the same
// entry), overwrites and idle cycles are
// applied; after every edge all N entries (vals) and the selected read port
// are compared with a reference model that adds residues with %.
module tb_acc_array;
  import hrfna_pkg::*;

  localparam int N = 8;
  logic clk = 0, rst_n = 0, acc_en = 0, accb_en = 0, wr_en = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] acc_idx, accb_idx, wr_idx, rd_idx;
  rvec_t acc_r, accb_r;
  hnum_t wr_val, rd_val;
  hnum_t [N-1:0] vals;
  hnum_t model [N];

  acc_array #(.N(N)) dut (.clk, .rst_n, .acc_en, .acc_idx, .acc_r, .accb_en, .accb_idx, .accb_r, .wr_en, .wr_idx,
                          .wr_val, .rd_idx, .rd_val, .vals);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_idx = 0; accb_idx = 0; wr_idx = 0; rd_idx = 0; acc_r = '0; accb_r = '0; wr_val = '0;
    for (int j = 0; j < N; j++) model[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int sel;
      @(negedge clk);
      for (int j = 0; j < N; j++) begin
        checks++;
        if (vals[j] === model[j]) continue;
        failures++;
        if (failures < 10) $display("k=%0d entry %0d differs", k, j);
      end
      rd_idx = 3'($urandom_range(7, 0));
      #1;
      checks++;
      if (rd_val !== model[rd_idx]) failures++;
      sel = $urandom_range(9, 0);
      acc_en  = (sel < 7) && (sel != 2);
      accb_en = (sel < 7) && (sel > 1);
      wr_en   = (sel == 7);
      acc_idx  = 3'($urandom_range(7, 0));
      accb_idx = (sel == 4) ? acc_idx : 3'($urandom_range(7, 0));
      wr_idx  = 3'($urandom_range(7, 0));
      for (int i = 0; i < K; i++) begin
        acc_r[i]    = res_t'($urandom_range(MODULI[i] - 1, 0));
        accb_r[i]   = res_t'($urandom_range(MODULI[i] - 1, 0));
        wr_val.r[i] = res_t'($urandom_range(MODULI[i] - 1, 0));
      end
      wr_val.f = exp_t'($urandom_range(60, 0) - 30);
      if (wr_en) model[wr_idx] = wr_val;
      else begin
        if (acc_en)
          for (int i = 0; i < K; i++)
            model[acc_idx].r[i] = res_t'((32'(model[acc_idx].r[i]) + 32'(acc_r[i])) % MODULI[i]);
        if (accb_en)
          for (int i = 0; i < K; i++)
            model[accb_idx].r[i] = res_t'((32'(model[accb_idx].r[i]) + 32'(accb_r[i])) % MODULI[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
