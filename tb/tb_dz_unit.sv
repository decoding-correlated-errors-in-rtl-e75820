// tb_dz_unit: passes of the D_Z unit with its early-stopping test. After every pass
// the hard decisions must equal the signs of b_in + S at the end of the pass, the
// check result must arrive M+2 clocks after pass_done, and ok and weight must match
// a direct evaluation of D_Z * hd = s_Z and sum hd[i] * wt[i]. One decoding has a
// zero syndrome and strongly positive bottom messages, so the estimate is all-zero
// and must pass; random syndromes must make the test fail.
module tb_dz_unit;
  import gari_pkg::*;

  localparam int M = 8, N = 20, W = 6, PIPE = 4;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_DZ_ROW;
  idx_t cfg_addr = 0;
  logic [2:0] cfg_len = 0;
  idx_t cfg_data [W];
  logic clear = 0, start = 0, pass_done, busy;
  logic [M-1:0] syn;
  logic ord_swap, ord_ready = 1;
  logic [2:0] ord_addr, ord_row;
  msg_t b_in [N];
  app_t s_out [N];
  logic chk_valid, chk_ok, chk_busy;
  logic [31:0] chk_weight;
  logic [N-1:0] hd_out;

  int rlen [M], rcol [M][W], wt [N];
  int checks = 0, failures = 0, n_ok = 0, n_bad = 0;

  always #5 clk = ~clk;
  assign ord_row = ord_addr;

  dz_unit #(.M(M), .N(N), .W_MAX(W), .PIPE(PIPE)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data, .clear, .syn, .start, .cancel(1'b0),
    .pass_done, .busy, .ord_swap, .ord_ready, .ord_addr, .ord_row, .b_in, .s_out,
    .chk_valid, .chk_ok, .chk_weight, .chk_busy, .hd_out);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < M; r++) begin
      rlen[r] = $urandom_range(2, W);
      for (int k = 0; k < rlen[r]; k++) begin
        bit dup;
        do begin
          rcol[r][k] = $urandom_range(0, N - 1);
          dup = 0;
          for (int q = 0; q < k; q++) if (rcol[r][q] == rcol[r][k]) dup = 1;
        end while (dup);
      end
    end
    foreach (wt[i]) wt[i] = $urandom_range(1, 100);
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
    for (int dec = 0; dec < 4; dec++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      foreach (syn[r]) syn[r] = (dec == 0) ? 1'b0 : 1'($urandom);
      for (int pass = 0; pass < 3; pass++) begin
        bit hd_exp [N];
        bit exp_ok;
        int exp_w, tp, tc;
        foreach (b_in[i]) b_in[i] = (dec == 0) ? msg_t'(400) : msg_t'($urandom_range(0, 400) - 200);
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        while (!pass_done) @(posedge clk);
        tp = $time;
        @(negedge clk);
        foreach (hd_exp[i]) hd_exp[i] = (int'(b_in[i]) + int'(s_out[i])) < 0;
        exp_ok = 1; exp_w = 0;
        for (int r = 0; r < M; r++) begin
          bit p;
          p = syn[r];
          for (int k = 0; k < rlen[r]; k++) p ^= hd_exp[rcol[r][k]];
          if (p) exp_ok = 0;
        end
        for (int i = 0; i < N; i++) if (hd_exp[i]) exp_w += wt[i];
        while (!chk_valid) @(posedge clk);
        tc = $time;
        check((tc - tp) / 10 == M + 2, $sformatf("check result %0d clocks after pass end", (tc - tp) / 10));
        @(negedge clk);
        for (int i = 0; i < N; i++) check(hd_out[i] == hd_exp[i], $sformatf("hd[%0d]", i));
        check(chk_ok == exp_ok, $sformatf("dec %0d pass %0d ok=%0d exp %0d", dec, pass, chk_ok, exp_ok));
        check(int'(chk_weight) == exp_w, $sformatf("weight %0d exp %0d", chk_weight, exp_w));
        if (exp_ok) n_ok++; else n_bad++;
      end
    end
    check(n_ok > 0 && n_bad > 0, "both outcomes of the stop test must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
