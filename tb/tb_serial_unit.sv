// tb_serial_unit: runs several passes of the serial NMS unit on a random small matrix
// and compares the column sums S with a reference model written here. The model
// follows the documented pipeline behaviour: the row in position p of the order sees
// the write-backs of the rows in positions up to p-(PIPE-1) only, and each write-back
// adds (new - old) to S. With 12 rows and a 10-stage pipeline nearly every row reads
// stale sums, so the test also covers the hazard handling. The bottom messages b_in
// change between passes; the order is a fresh random permutation for every pass, once
// with the order source holding ready low for a while. The pass length must be
// M + PIPE + 1 clocks from start to done (plus the clocks spent waiting for the order).
module tb_serial_unit;
  import gari_pkg::*;

  localparam int M = 12, N = 30, W = 6, PIPE = 10, L = PIPE - 1;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_row = 0;
  logic [2:0] cfg_len = 0;
  idx_t cfg_cols [W];
  logic clear = 0, start = 0, done, busy;
  logic [M-1:0] syn;
  logic ord_swap, ord_ready = 1;
  logic [3:0] ord_addr, ord_row;
  msg_t b_in [N];
  app_t s_out [N];

  int ord [M];
  int rlen [M];
  int rcol [M][W];
  int S_ref [N];
  int c2v_ref [M][W];
  int checks = 0, failures = 0;
  int n_swaps = 0, n_stall = 0;

  always #5 clk = ~clk;
  assign ord_row = 4'(ord[ord_addr]);

  serial_unit #(.M(M), .N(N), .W_MAX(W), .PIPE(PIPE), .ALPHA_SHIFT(5)) dut (
    .clk, .rst_n, .cfg_we, .cfg_row, .cfg_len, .cfg_cols, .clear, .syn, .start, .cancel(1'b0), .done, .busy,
    .ord_swap, .ord_ready, .ord_addr, .ord_row, .b_in, .s_out);

  always @(posedge clk) if (ord_swap) n_swaps++;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int sat12(int x);
    return (x > 2047) ? 2047 : (x < -2047) ? -2047 : x;
  endfunction

  // one pass of the reference model
  task automatic ref_pass();
    int delta [M][W];
    int dcol  [M][W];
    int dlen  [M];
    for (int p = 0; p < M; p++) begin
      int r, v [W], mn, sg, a, m;
      if (p - L >= 0)
        for (int k = 0; k < dlen[p-L]; k++) S_ref[dcol[p-L][k]] += delta[p-L][k];
      r = ord[p];
      for (int k = 0; k < rlen[r]; k++)
        v[k] = sat12(int'(b_in[rcol[r][k]]) + S_ref[rcol[r][k]] - c2v_ref[r][k]);
      dlen[p] = rlen[r];
      for (int k = 0; k < rlen[r]; k++) begin
        mn = 2047; sg = syn[r];
        for (int j = 0; j < rlen[r]; j++) if (j != k) begin
          a = (v[j] < 0) ? -v[j] : v[j];
          if (a < mn) mn = a;
          sg ^= (v[j] < 0);
        end
        m = mn - (mn >> 5);
        m = sg ? -m : m;
        delta[p][k] = m - c2v_ref[r][k];
        dcol[p][k]  = rcol[r][k];
        c2v_ref[r][k] = m;
      end
    end
    for (int p = (M - L > 0 ? M - L : 0); p < M; p++)
      for (int k = 0; k < dlen[p]; k++) S_ref[dcol[p][k]] += delta[p][k];
  endtask

  task automatic run_pass(int stall);
    int t0, t1;
    // fresh random order
    for (int i = 0; i < M; i++) ord[i] = i;
    for (int i = M - 1; i > 0; i--) begin
      int j, tmp;
      j = $urandom_range(0, i);
      tmp = ord[i]; ord[i] = ord[j]; ord[j] = tmp;
    end
    for (int i = 0; i < N; i++) b_in[i] = msg_t'($urandom_range(0, 200) - 100);
    ord_ready = (stall == 0);
    @(negedge clk); start = 1;
    @(posedge clk); t0 = $time;
    @(negedge clk); start = 0;
    if (stall > 0) begin
      repeat (stall) @(negedge clk);
      ord_ready = 1;
      n_stall++;
    end
    while (!done) @(posedge clk);
    t1 = $time;
    // start taken at t0; one clock to get the order, M issue clocks, the last row
    // written PIPE-1 clocks after its issue, done registered one clock later; the
    // wait loop above sees done one clock after it rises
    check((t1 - t0) / 10 == M + PIPE + 2 + (stall > 0 ? stall : 0),
          $sformatf("pass took %0d clocks", (t1 - t0) / 10));
    ref_pass();
    @(negedge clk);
    for (int i = 0; i < N; i++)
      check(int'(s_out[i]) == S_ref[i], $sformatf("S[%0d] = %0d, expected %0d", i, s_out[i], S_ref[i]));
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random matrix, distinct columns per row
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
    for (int r = 0; r < M; r++) syn[r] = 1'($urandom);
    for (int i = 0; i < N; i++) b_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      cfg_we = 1; cfg_row = 4'(r); cfg_len = 3'(rlen[r]);
      for (int k = 0; k < W; k++) cfg_cols[k] = idx_t'(k < rlen[r] ? rcol[r][k] : 0);
    end
    @(negedge clk); cfg_we = 0;
    for (int rep = 0; rep < 2; rep++) begin
      // a new decoding: forget every message
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      foreach (S_ref[i]) S_ref[i] = 0;
      foreach (c2v_ref[r, k]) c2v_ref[r][k] = 0;
      for (int p = 0; p < 4; p++) run_pass((rep == 1 && p == 2) ? 5 : 0);
    end
    check(n_swaps == 8, $sformatf("%0d order swaps for 8 passes", n_swaps));
    check(n_stall == 1, "stall case not run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
