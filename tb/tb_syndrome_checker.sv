// tb_syndrome_checker: random D_Z rows and random weights; for many hard-decision
// vectors (random ones, and ones built to satisfy the syndrome) the checker's ok and
// weight are compared with a direct computation, and done must come M clocks after
// start.
module tb_syndrome_checker;
  import gari_pkg::*;

  localparam int M = 7, N = 20, W = 6;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_DZ_ROW;
  idx_t cfg_addr = 0;
  logic [2:0] cfg_len = 0;
  idx_t cfg_data [W];
  logic [M-1:0] syn;
  logic [N-1:0] hd;
  logic start = 0, done, ok;
  logic [31:0] weight;

  int rlen [M], rcol [M][W], wt [N];
  int checks = 0, failures = 0, n_ok = 0, n_bad = 0;

  always #5 clk = ~clk;

  syndrome_checker #(.M(M), .N(N), .W_MAX(W)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data, .syn, .hd, .start, .cancel(1'b0), .done, .ok, .weight);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < M; r++) begin
      rlen[r] = $urandom_range(1, W);
      for (int k = 0; k < rlen[r]; k++) begin
        bit dup;
        do begin
          rcol[r][k] = $urandom_range(0, N - 1);
          dup = 0;
          for (int q = 0; q < k; q++) if (rcol[r][q] == rcol[r][k]) dup = 1;
        end while (dup);
      end
    end
    foreach (wt[i]) wt[i] = $urandom_range(0, 2047);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      cfg_we = 1; cfg_sel = CFG_DZ_ROW; cfg_addr = idx_t'(r); cfg_len = 3'(rlen[r]);
      for (int k = 0; k < W; k++) cfg_data[k] = idx_t'(k < rlen[r] ? rcol[r][k] : 0);
    end
    for (int b = 0; b < N; b += W) begin
      @(negedge clk);
      cfg_we = 1; cfg_sel = CFG_WT_XBAR; cfg_addr = idx_t'(b);
      cfg_len = 3'((N - b < W) ? N - b : W);
      for (int k = 0; k < W; k++) cfg_data[k] = idx_t'((b + k < N) ? wt[b + k] : 0);
    end
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 40; t++) begin
      int exp_w, t0, t1;
      bit exp_ok;
      foreach (hd[i]) hd[i] = 1'($urandom_range(0, 3) == 0);
      // half of the cases get the syndrome of hd itself, so they must pass
      for (int r = 0; r < M; r++) begin
        bit p;
        p = 0;
        for (int k = 0; k < rlen[r]; k++) p ^= hd[rcol[r][k]];
        syn[r] = (t % 2 == 0) ? p : 1'($urandom);
      end
      exp_ok = 1; exp_w = 0;
      for (int r = 0; r < M; r++) begin
        bit p;
        p = syn[r];
        for (int k = 0; k < rlen[r]; k++) p ^= hd[rcol[r][k]];
        if (p) exp_ok = 0;
      end
      for (int i = 0; i < N; i++) if (hd[i]) exp_w += wt[i];
      if (exp_ok) n_ok++; else n_bad++;
      @(negedge clk); start = 1;
      @(posedge clk); t0 = $time;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      t1 = $time;
      // done rises M clocks after start is taken; the loop sees it one clock later
      check((t1 - t0) / 10 == M + 1, $sformatf("check took %0d clocks", (t1 - t0) / 10));
      @(negedge clk);
      check(ok == exp_ok, $sformatf("case %0d ok=%0d exp %0d", t, ok, exp_ok));
      check(int'(weight) == exp_w, $sformatf("case %0d weight=%0d exp %0d", t, weight, exp_w));
    end
    check(n_ok > 0 && n_bad > 0, "both outcomes must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
