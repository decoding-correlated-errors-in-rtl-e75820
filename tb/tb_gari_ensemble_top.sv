// tb_gari_ensemble_top: end-to-end test of the GARI-NMS ensemble decoder, reduced
// to 4 members on a small random GARI graph (20 X checks, 24 Z checks, 60 + 72 + 150
// error columns) and MAX_ITER = 8 so that it runs in seconds.
//
// The graph and priors are written through the configuration port, then a series of
// decodings is run: correctable X, Z and Y errors, a zero syndrome, and random Z
// syndromes (mostly not reachable by weight-limited errors, so the ensemble must give
// up after MAX_ITER). For every decoding the test checks:
//   - done arrives exactly DONE0 + (iterations - 1) * ITER_CLK clocks after start;
//   - on success, e_x_hat satisfies D_Z e_x_hat = s_Z (independent model), the winner
//     converged, and no converged member has a smaller weight or a lower index with
//     equal weight (members are observed at the clock of their checks);
//   - n_conv equals the number of members that converged in that iteration, and no
//     member converged in an earlier iteration;
//   - busy drops within one serial pass after done, and the next decoding works.
// Each mechanism is counted (early stop, more than one member converging together,
// a member other than 0 winning, stop at MAX_ITER, halt of members in the middle of
// a pass); a mechanism that never happened counts as a failure. A watchdog ends
// the run.
module tb_gari_ensemble_top;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int E = 4;
  localparam int MX = 20, NZ = 60, MZ = 24, NX = 72, NY = 150, W = 16, YD = 8;
  localparam int LANES = 72, PIPE = 10, MAXI = 8, ITW = 4;
  localparam int ITER_CLK = 2 + MZ + PIPE + 5;   // GU + GV + max(MX, MZ) + PIPE + 5
  // start -> first done: clear, first iteration, the test (M_Z + 2), the selector
  // register, and the clock in which the test loop sees the registered pulse
  localparam int DONE0 = 1 + ITER_CLK + MZ + 2 + 1;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_DX_ROW;
  idx_t cfg_addr = 0;
  logic [4:0] cfg_len = 0;
  idx_t cfg_data [W];
  logic start = 0, busy, done, success;
  logic [MX-1:0] s_x;
  logic [MZ-1:0] s_z;
  logic [2:0] winner, n_conv;
  logic [ITW-1:0] iterations;
  logic [NX-1:0] e_x_hat;

  int checks = 0, failures = 0;
  int n_early = 0, n_multi = 0, n_nonzero_win = 0, n_maxiter = 0, n_midpass_halt = 0;
  gari_graph g;

  always #5 clk = ~clk;

  gari_ensemble_top #(
    .E(E), .M_X(MX), .N_Z(NZ), .M_Z(MZ), .N_X(NX), .N_Y(NY), .W_MAX(W), .YDEG(YD),
    .LANES(LANES), .PIPE(PIPE), .MAX_ITER(MAXI), .ITW(ITW)
  ) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
    .start, .s_x, .s_z, .busy, .done, .success, .winner, .n_conv, .iterations, .e_x_hat);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // member observations at the clock of the last check results
  bit       obs_ok [E];
  int       obs_w  [E];
  int       obs_conv_before;

  always @(posedge clk) begin
    if (dut.chk_valid[0]) begin
      for (int m = 0; m < E; m++) begin
        if (obs_ok[m] === 1'b1) obs_conv_before++;
        obs_ok[m] = dut.chk_ok[m];
        obs_w[m]  = int'(dut.chk_weight[m]);
      end
    end
  end

  task automatic decode(bit ez[], bit ex[], bit ey[], bit rand_sz);
    bit ebz[], ebx[], sx[], sz[], h[];
    int t0, t1, n_ok, best;
    g.syndromes(ez, ex, ey, ebz, ebx, sx, sz);
    if (rand_sz) foreach (sz[r]) sz[r] = $urandom_range(0, 1);
    foreach (sx[r]) s_x[r] = sx[r];
    foreach (sz[r]) s_z[r] = sz[r];
    foreach (obs_ok[m]) obs_ok[m] = 0;
    obs_conv_before = 0;
    @(negedge clk); start = 1;
    @(posedge clk); t0 = $time / 10;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    t1 = $time / 10;
    check(t1 - t0 == DONE0 + (int'(iterations) - 1) * ITER_CLK,
          $sformatf("done after %0d clocks for %0d iterations", t1 - t0, iterations));
    check(obs_conv_before == 0, "a member converged before the deciding iteration");
    n_ok = 0; best = -1;
    for (int m = 0; m < E; m++)
      if (obs_ok[m]) begin
        n_ok++;
        if (best < 0 || obs_w[m] < obs_w[best]) best = m;
      end
    if (success) begin
      h = new[NX];
      foreach (h[i]) h[i] = e_x_hat[i];
      check(g.z_ok(h, sz), "e_x_hat does not satisfy D_Z e_x_hat = s_Z");
      check(int'(winner) == best, $sformatf("winner %0d, expected %0d", winner, best));
      check(int'(n_conv) == n_ok, $sformatf("n_conv %0d, expected %0d", n_conv, n_ok));
      check(e_x_hat == dut.hd[winner], "e_x_hat is not the winner's estimate");
      if (iterations < ITW'(MAXI)) n_early++;
      if (n_conv > 1) n_multi++;
      if (winner != 0) n_nonzero_win++;
      // the members are halted mid-pass: their D_X / D_Z passes were running
      if (dut.g_member[0].u_dec.u_dx.busy || dut.g_member[0].u_dec.u_dz.busy) n_midpass_halt++;
    end else begin
      check(n_ok == 0, "failure reported although a member converged");
      check(iterations == ITW'(MAXI), $sformatf("failure after %0d iterations", iterations));
      n_maxiter++;
    end
    // busy must fall within one serial pass plus the pipeline after done
    t0 = $time / 10;
    while (busy) begin
      @(posedge clk);
      if ($time / 10 - t0 > MZ + PIPE + 4) break;
    end
    check(!busy, "members still busy long after done");
  endtask

  initial begin
    #50000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sel, addr, len, data[];
    bit ez[], ex[], ey[];
    g = new(MX, NZ, MZ, NX, NY, W, YD, 32'd99);
    g.build();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < g.n_beats(W); b++) begin
      g.beat(b, W, sel, addr, len, data);
      @(negedge clk);
      cfg_we = 1; cfg_sel = cfg_sel_e'(sel); cfg_addr = idx_t'(addr); cfg_len = 5'(len);
      for (int k = 0; k < W; k++) cfg_data[k] = idx_t'(data[k]);
    end
    @(negedge clk); cfg_we = 0;
    for (int d = 0; d < 40; d++) begin
      ez = new[NZ]; ex = new[NX]; ey = new[NY];
      if (d % 8 != 7)
        for (int e = 0; e < 1 + d % 3; e++)
          case ($urandom_range(0, 2))
            0: ez[$urandom_range(0, NZ - 1)] = 1;
            1: ex[$urandom_range(0, NX - 1)] = 1;
            default: ey[$urandom_range(0, NY - 1)] = 1;
          endcase
      decode(ez, ex, ey, d % 8 == 7);
    end
    $display("early stops %0d, joint convergences %0d, non-zero winners %0d, MAX_ITER stops %0d, mid-pass halts %0d",
             n_early, n_multi, n_nonzero_win, n_maxiter, n_midpass_halt);
    check(n_early > 0, "early stopping never happened");
    check(n_multi > 0, "no two members ever converged in the same iteration");
    check(n_nonzero_win > 0, "a member other than 0 never won");
    check(n_maxiter > 0, "the ensemble never stopped at MAX_ITER");
    check(n_midpass_halt > 0, "members were never halted during a pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
