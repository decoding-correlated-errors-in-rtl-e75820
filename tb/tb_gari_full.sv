// tb_gari_full: the ensemble decoder at its full default size, with no parameter
// overrides: 24 members, the [[144,12,12]] GARI graph shape (D_X 792 x 7920, D_Z
// 936 x 8784, 51048 Y columns), 12-bit messages, 10-stage serial pipelines,
// MAX_ITER = 400.
//
// A random graph of that shape (3 to 4 ones per column, at most 48 per row, at most
// 16 Y columns per U or V row) is written through the configuration port. Then a
// series of decodings of 1 to 24 X / Z / Y errors is run. Light errors (up to 2)
// must be decoded; for heavier ones a success is checked when it happens. On every
// success e_x_hat must satisfy D_Z e_x_hat = s_Z (independent model); for up to 2
// errors it must also equal the injected e_bar_X. At least one decoding must need
// more than one iteration. Done must arrive exactly 1 + 953 * iterations + 938 + 1 clocks after
// start (clear, iterations of 2 + 936 + 10 + 5 clocks, the test of the last
// estimate, the selector register, one clock for the test loop to see the pulse).
// A watchdog ends the run.
module tb_gari_full;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int MX = 792, NZ = 7920, MZ = 936, NX = 8784, NY = 51048, W = 48, YD = 16;
  localparam int ITER_CLK = 2 + MZ + 10 + 5;
  localparam int ITW = 9;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_DX_ROW;
  idx_t cfg_addr = 0;
  logic [5:0] cfg_len = 0;
  idx_t cfg_data [W];
  logic start = 0, busy, done, success;
  logic [MX-1:0] s_x;
  logic [MZ-1:0] s_z;
  logic [4:0] winner, n_conv;
  logic [ITW-1:0] iterations;
  logic [NX-1:0] e_x_hat;

  int checks = 0, failures = 0;
  int n_multi_iter = 0, n_succ = 0;
  gari_graph g;

  always #5 clk = ~clk;

  gari_ensemble_top dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
    .start, .s_x, .s_z, .busy, .done, .success, .winner, .n_conv, .iterations, .e_x_hat);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic decode(int n_err);
    bit ez[], ex[], ey[], ebz[], ebx[], sx[], sz[], h[];
    int t0, t1;
    bit same;
    ez = new[NZ]; ex = new[NX]; ey = new[NY]; h = new[NX];
    for (int e = 0; e < n_err; e++)
      case ($urandom_range(0, 2))
        0: ez[$urandom_range(0, NZ - 1)] = 1;
        1: ex[$urandom_range(0, NX - 1)] = 1;
        default: ey[$urandom_range(0, NY - 1)] = 1;
      endcase
    g.syndromes(ez, ex, ey, ebz, ebx, sx, sz);
    foreach (sx[r]) s_x[r] = sx[r];
    foreach (sz[r]) s_z[r] = sz[r];
    @(negedge clk); start = 1;
    @(posedge clk); t0 = $time / 10;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    t1 = $time / 10;
    $display("decoding with %0d errors: success %0d after %0d iterations, %0d clocks, winner %0d of %0d converged",
             n_err, success, iterations, t1 - t0, winner, n_conv);
    if (n_err <= 2) check(success, "decoding of a light error failed");
    if (success) n_succ++;
    if (success && iterations > 1) n_multi_iter++;
    check(t1 - t0 == 1 + int'(iterations) * ITER_CLK + MZ + 2 + 1,
          $sformatf("done after %0d clocks for %0d iterations", t1 - t0, iterations));
    if (success) begin
      foreach (h[i]) h[i] = e_x_hat[i];
      check(g.z_ok(h, sz), "e_x_hat does not satisfy D_Z e_x_hat = s_Z");
      if (n_err <= 2) begin
        same = 1;
        foreach (h[i]) if (h[i] != ebx[i]) same = 0;
        check(same, "e_x_hat differs from the injected e_bar_X");
      end
    end
    while (busy) @(posedge clk);
  endtask

  initial begin
    #2000000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sel, addr, len, data[];
    int heavy[] = '{6, 12, 18, 24, 30, 40};
    g = new(MX, NZ, MZ, NX, NY, W, YD, 32'd2024);
    g.build();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < g.n_beats(W); b++) begin
      g.beat(b, W, sel, addr, len, data);
      @(negedge clk);
      cfg_we = 1; cfg_sel = cfg_sel_e'(sel); cfg_addr = idx_t'(addr); cfg_len = 6'(len);
      for (int k = 0; k < W; k++) cfg_data[k] = idx_t'(data[k]);
    end
    @(negedge clk); cfg_we = 0;
    $display("configuration written at %0t", $time);
    decode(1);
    decode(2);
    foreach (heavy[d]) decode(heavy[d]);
    decode(1);
    $display("%0d decodings succeeded, %0d of them after more than one iteration", n_succ, n_multi_iter);
    check(n_multi_iter > 0, "no decoding needed more than one iteration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
