// tb_gari_decoder: one GARI-NMS decoder on a small random GARI graph (20 X checks,
// 24 Z checks, 60 + 72 + 150 error columns). Each decoding injects a few X, Z or Y
// errors, computes the syndromes, and watches the per-iteration checks: every check
// result must agree with an independent test of D_Z * hd = s_Z, and on the first
// success the estimate must equal the injected e_bar_X = e_X + V e_Y; the test then
// raises halt as the ensemble would. The clocks between two check results must
// match the iteration length of the documented schedule. A last decoding never halts,
// and the decoder must stop by itself after MAX_ITER iterations.
module tb_gari_decoder;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int MX = 20, NZ = 60, MZ = 24, NX = 72, NY = 150, W = 16, YD = 8;
  localparam int LANES = 72, PIPE = 10, MAXI = 8, ITW = 4;
  // bottom: 1 clock to start, 2 layer clocks, 1 clock done; top: 1 clock to start,
  // then the longer serial pass, M_Z + PIPE + 1, and 1 clock to hand over
  localparam int ITER_CLK = 2 + MZ + PIPE + 5;  // GU + GV + max(MX, MZ) + PIPE + 5

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_DX_ROW;
  idx_t cfg_addr = 0;
  logic [4:0] cfg_len = 0;
  idx_t cfg_data [W];
  logic start = 0, halt = 0, busy;
  logic [MX-1:0] s_x;
  logic [MZ-1:0] s_z;
  logic chk_valid, chk_ok, chk_last;
  logic [31:0] chk_weight;
  logic [ITW-1:0] chk_iter;
  logic [NX-1:0] hd;

  gari_graph g;
  int checks = 0, failures = 0, n_conv = 0, n_maxiter = 0;

  always #5 clk = ~clk;

  gari_decoder #(.M_X(MX), .N_Z(NZ), .M_Z(MZ), .N_X(NX), .N_Y(NY), .W_MAX(W), .YDEG(YD),
                 .LANES(LANES), .PIPE(PIPE), .MAX_ITER(MAXI), .ITW(ITW)) dut (
    .clk, .rst_n, .seed(32'hC0FFEE), .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
    .start, .s_x, .s_z, .halt, .busy, .chk_valid, .chk_ok, .chk_last, .chk_weight, .chk_iter, .hd);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // one decoding; returns when the decoder is idle again
  task automatic decode(int n_err, bit allow_halt);
    bit ez[], ex[], ey[], ebz[], ebx[], sx[], sz[], h[];
    int last_t, it_seen;
    bit finished;
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
    @(negedge clk); start = 0;
    last_t = -1; it_seen = 0; finished = 0;
    while (!finished) begin
      @(posedge clk);
      if (chk_valid) begin
        bit ok_ref;
        it_seen++;
        foreach (h[i]) h[i] = hd[i];
        ok_ref = g.z_ok(h, sz);
        check(chk_ok == ok_ref, $sformatf("iteration %0d: chk_ok=%0d, direct test %0d", it_seen, chk_ok, ok_ref));
        check(int'(chk_iter) == it_seen, "iteration number");
        if (last_t >= 0)
          check(($time - last_t) / 10 == ITER_CLK, $sformatf("iteration took %0d clocks", ($time - last_t) / 10));
        last_t = $time;
        if (chk_ok && allow_halt) begin
          bit same;
          same = 1;
          foreach (h[i]) if (h[i] != ebx[i]) same = 0;
          check(same, "converged estimate differs from the injected error");
          n_conv++;
          @(negedge clk); halt = 1;
          @(negedge clk); halt = 0;
          finished = 1;
        end else if (chk_last) begin
          check(it_seen == MAXI, "last check is not iteration MAX_ITER");
          n_maxiter++;
          finished = 1;
        end
      end
    end
    while (busy) @(posedge clk);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sel, addr, len, data[];
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
    decode(0, 1);
    for (int d = 0; d < 12; d++) decode(1 + d % 2, 1);
    decode(1, 0);
    // a small random graph can leave a 2-error pattern undecodable within MAX_ITER
    $display("converged %0d of 13, stopped at MAX_ITER %0d times", n_conv, n_maxiter);
    check(n_conv >= 11, $sformatf("only %0d of 13 decodings converged", n_conv));
    check(n_conv + n_maxiter == 14, "a decoding ended neither by convergence nor at MAX_ITER");
    check(n_maxiter >= 1, "the decoder never stopped at MAX_ITER");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
