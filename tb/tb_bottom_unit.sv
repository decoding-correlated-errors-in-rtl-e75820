// tb_bottom_unit: three passes of the two-layer bottom-part unit on a random small
// GARI bottom part (5 U rows, 6 V rows, 12 Y columns, 3 lanes, so each layer takes
// two row groups), checked against a reference written here: U layer then V layer,
// every row computed with a direct min-sum (min over the other inputs, sign product,
// alpha = 1 - 2^-5), e_Y messages prior + message from the other layer. The inputs
// from the D units (tz, tx) change between passes, and the outputs bz, bx are
// compared after each pass. The pass must take GU + GV clocks (one per row group).
module tb_bottom_unit;
  import gari_pkg::*;

  localparam int NZ = 5, NX = 6, NY = 12, YD = 4, LANES = 3, W = 6;
  localparam int GU = (NZ + LANES - 1) / LANES, GV = (NX + LANES - 1) / LANES;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_U_ROW;
  idx_t cfg_addr = 0;
  logic [2:0] cfg_len = 0;
  idx_t cfg_data [W];
  logic clear = 0, start = 0, done, busy;
  app_t tz [NZ];
  app_t tx [NX];
  msg_t bz [NZ];
  msg_t bx [NX];

  int u_of [NY], v_of [NY];
  int pz [NZ], px [NX], py [NY];
  int cU [NY], cV [NY], bz_ref [NZ], bx_ref [NX];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bottom_unit #(.NZ(NZ), .NX(NX), .NY(NY), .YDEG(YD), .LANES(LANES), .W_MAX(W), .ALPHA_SHIFT(5)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data, .clear, .start, .done, .busy,
    .tz_in(tz), .tx_in(tx), .bz_out(bz), .bx_out(bx));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int sat12(int x);
    return (x > 2047) ? 2047 : (x < -2047) ? -2047 : x;
  endfunction

  // min-sum output to input k of a row whose inputs are v[0..n-1]
  function automatic int ms_out(int v[], int n, int k);
    int mn, sg, a;
    mn = 2047; sg = 0;
    for (int j = 0; j < n; j++) if (j != k) begin
      a = (v[j] < 0) ? -v[j] : v[j];
      if (a < mn) mn = a;
      sg ^= (v[j] < 0);
    end
    mn = mn - (mn >> 5);
    return sg ? -mn : mn;
  endfunction

  task automatic ref_pass();
    for (int i = 0; i < NZ; i++) begin
      int v[], js[], n;
      v = new[2 + NY]; js = new[NY]; n = 2;
      v[0] = pz[i]; v[1] = sat12(int'(tz[i]));
      for (int j = 0; j < NY; j++) if (u_of[j] == i) begin js[n-2] = j; v[n] = sat12(py[j] + cV[j]); n++; end
      bz_ref[i] = ms_out(v, n, 1);
      for (int q = 2; q < n; q++) cU[js[q-2]] = ms_out(v, n, q);
    end
    for (int i = 0; i < NX; i++) begin
      int v[], js[], n;
      v = new[2 + NY]; js = new[NY]; n = 2;
      v[0] = px[i]; v[1] = sat12(int'(tx[i]));
      for (int j = 0; j < NY; j++) if (v_of[j] == i) begin js[n-2] = j; v[n] = sat12(py[j] + cU[j]); n++; end
      bx_ref[i] = ms_out(v, n, 1);
      for (int q = 2; q < n; q++) cV[js[q-2]] = ms_out(v, n, q);
    end
  endtask

  task automatic write_row(cfg_sel_e sel, int row, int of[]);
    int n;
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = idx_t'(row); n = 0;
    foreach (cfg_data[k]) cfg_data[k] = '0;
    for (int j = 0; j < NY; j++) if (of[j] == row) begin cfg_data[n] = idx_t'(j); n++; end
    cfg_len = 3'(n);
  endtask

  task automatic write_prior(cfg_sel_e sel, int base, int vals[], int n);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = idx_t'(base);
    cfg_len = 3'(n);
    for (int k = 0; k < W; k++) cfg_data[k] = idx_t'(k < n ? vals[base + k] & 16'hFFFF : 0);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt_u [NZ], cnt_v [NX];
    int t0, t1;
    foreach (cnt_u[i]) cnt_u[i] = 0;
    foreach (cnt_v[i]) cnt_v[i] = 0;
    for (int j = 0; j < NY; j++) begin
      do u_of[j] = $urandom_range(0, NZ - 1); while (cnt_u[u_of[j]] >= YD);
      cnt_u[u_of[j]]++;
      do v_of[j] = $urandom_range(0, NX - 1); while (cnt_v[v_of[j]] >= YD);
      cnt_v[v_of[j]]++;
    end
    foreach (pz[i]) pz[i] = $urandom_range(10, 300);
    foreach (px[i]) px[i] = $urandom_range(10, 300);
    foreach (py[i]) py[i] = $urandom_range(10, 300);
    foreach (cU[j]) begin cU[j] = 0; cV[j] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NZ; i++) write_row(CFG_U_ROW, i, u_of);
    for (int i = 0; i < NX; i++) write_row(CFG_V_ROW, i, v_of);
    write_prior(CFG_PRIOR_Z, 0, pz, NZ);
    write_prior(CFG_PRIOR_X, 0, px, NX);
    write_prior(CFG_PRIOR_Y, 0, py, W);
    write_prior(CFG_PRIOR_Y, W, py, NY - W);
    @(negedge clk); cfg_we = 0; clear = 1;
    @(negedge clk); clear = 0;
    for (int pass = 0; pass < 3; pass++) begin
      // messages from the D units: zero in the first pass, random afterwards
      foreach (tz[i]) tz[i] = (pass == 0) ? '0 : app_t'($urandom_range(0, 600) - 300);
      foreach (tx[i]) tx[i] = (pass == 0) ? '0 : app_t'($urandom_range(0, 600) - 300);
      @(negedge clk); start = 1;
      @(posedge clk); t0 = $time;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      t1 = $time;
      // start taken at t0, GU+GV row-group clocks, done seen one clock later
      check((t1 - t0) / 10 == GU + GV + 1, $sformatf("pass took %0d clocks", (t1 - t0) / 10));
      ref_pass();
      @(negedge clk);
      for (int i = 0; i < NZ; i++)
        check(int'(bz[i]) == bz_ref[i], $sformatf("pass %0d bz[%0d]=%0d exp %0d", pass, i, bz[i], bz_ref[i]));
      for (int i = 0; i < NX; i++)
        check(int'(bx[i]) == bx_ref[i], $sformatf("pass %0d bx[%0d]=%0d exp %0d", pass, i, bx[i], bx_ref[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
