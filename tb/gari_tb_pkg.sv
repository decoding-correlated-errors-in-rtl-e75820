// gari_tb_pkg: test-side model of a GARI decoding graph.
//
// gari_graph builds a random graph with the shape of a GARI matrix: a D_X block
// (MX rows, NZ columns) and a D_Z block (MZ rows, NX columns) with 3 to 4 ones per
// column and at most WMAX ones per row, and the maps u(j), v(j) that give, for each
// of the NY Y columns, the single 1 of column j in U and in V (at most YDEG per row).
// Real detector error models come from circuit simulation; this stand-in has the
// same block structure and similar densities, which is what the hardware sees.
// It also produces the configuration writes for the decoder, turns an error
// (e_Z, e_X, e_Y) into the syndromes s_X = D_X (e_Z + U e_Y), s_Z = D_Z (e_X + V e_Y),
// and tests a candidate e_bar_X against s_Z. Its random numbers come from its own
// xorshift generator, so a graph depends only on its seed.
package gari_tb_pkg;

  class gari_graph;
    int MX, NZ, MZ, NX, NY, WMAX, YDEG;
    int dx_len[], dz_len[], ul_len[], vl_len[];
    int dx_col[][], dz_col[][], ul[][], vl[][];
    int u_of[], v_of[];
    int prior_z, prior_x, prior_y, wt_xbar;
    int unsigned st;

    function new(int mx, int nz, int mz, int nx, int ny, int wmax, int ydeg, int unsigned seed);
      MX = mx; NZ = nz; MZ = mz; NX = nx; NY = ny; WMAX = wmax; YDEG = ydeg;
      st = (seed == 0) ? 32'h2545F491 : seed;
      prior_z = 56; prior_x = 56; prior_y = 56; wt_xbar = 56;
    endfunction

    function int unsigned rnd();
      st ^= st << 13; st ^= st >> 17; st ^= st << 5;
      return st;
    endfunction

    function int rnd_below(int n);
      return int'(rnd() % n);
    endfunction

    // random block with `rows` rows and `cols` columns, 3..4 ones per column
    function void make_block(int rows, int cols, ref int len[], ref int col[][]);
      len = new[rows];
      col = new[rows];
      foreach (col[r]) begin col[r] = new[WMAX]; len[r] = 0; end
      for (int c = 0; c < cols; c++) begin
        int w;
        w = 3 + rnd_below(2);
        for (int t = 0; t < w; t++) begin
          int r, tries;
          bit dup;
          tries = 0;
          do begin
            r = rnd_below(rows);
            dup = 0;
            for (int q = 0; q < len[r]; q++) if (col[r][q] == c) dup = 1;
            tries++;
          end while ((dup || len[r] >= WMAX) && tries < 1000);
          if (!dup && len[r] < WMAX) begin
            col[r][len[r]] = c;
            len[r]++;
          end
        end
      end
    endfunction

    function void make_map(int rows, ref int of[], ref int len[], ref int lst[][]);
      of  = new[NY];
      len = new[rows];
      lst = new[rows];
      foreach (lst[r]) begin lst[r] = new[YDEG]; len[r] = 0; end
      for (int j = 0; j < NY; j++) begin
        int r;
        do r = rnd_below(rows); while (len[r] >= YDEG);
        of[j] = r;
        lst[r][len[r]] = j;
        len[r]++;
      end
    endfunction

    function void build();
      make_block(MX, NZ, dx_len, dx_col);
      make_block(MZ, NX, dz_len, dz_col);
      make_map(NZ, u_of, ul_len, ul);
      make_map(NX, v_of, vl_len, vl);
    endfunction

    // number of configuration writes, with `chunk` priors per write
    function int n_beats(int chunk);
      return MX + MZ + NZ + NX + (NZ + chunk - 1) / chunk + (NX + chunk - 1) / chunk
             + (NY + chunk - 1) / chunk + (NX + chunk - 1) / chunk;
    endfunction

    // configuration write number b: table, address, length, words (WMAX words)
    function void beat(int b, int chunk, output int sel, output int addr, output int len,
                       output int data[]);
      int base, n;
      data = new[WMAX];
      foreach (data[k]) data[k] = 0;
      if (b < MX) begin
        sel = 0; addr = b; len = dx_len[b];
        for (int k = 0; k < len; k++) data[k] = dx_col[b][k];
        return;
      end
      b -= MX;
      if (b < MZ) begin
        sel = 1; addr = b; len = dz_len[b];
        for (int k = 0; k < len; k++) data[k] = dz_col[b][k];
        return;
      end
      b -= MZ;
      if (b < NZ) begin
        sel = 2; addr = b; len = ul_len[b];
        for (int k = 0; k < len; k++) data[k] = ul[b][k];
        return;
      end
      b -= NZ;
      if (b < NX) begin
        sel = 3; addr = b; len = vl_len[b];
        for (int k = 0; k < len; k++) data[k] = vl[b][k];
        return;
      end
      b -= NX;
      for (int t = 0; t < 4; t++) begin
        int val;
        case (t)
          0: begin n = NZ; val = prior_z; end
          1: begin n = NX; val = prior_x; end
          2: begin n = NY; val = prior_y; end
          default: begin n = NX; val = wt_xbar; end
        endcase
        if (b < (n + chunk - 1) / chunk) begin
          sel  = 4 + t;
          base = b * chunk;
          addr = base;
          len  = (n - base < chunk) ? n - base : chunk;
          for (int k = 0; k < len; k++) data[k] = val & 16'hFFFF;
          return;
        end
        b -= (n + chunk - 1) / chunk;
      end
      sel = 0; addr = 0; len = 0;
    endfunction

    function void syndromes(bit ez[], bit ex[], bit ey[],
                            output bit ebz[], output bit ebx[], output bit sx[], output bit sz[]);
      ebz = new[NZ]; ebx = new[NX]; sx = new[MX]; sz = new[MZ];
      foreach (ebz[i]) ebz[i] = ez[i];
      foreach (ebx[i]) ebx[i] = ex[i];
      for (int j = 0; j < NY; j++) if (ey[j]) begin
        ebz[u_of[j]] ^= 1'b1;
        ebx[v_of[j]] ^= 1'b1;
      end
      for (int r = 0; r < MX; r++) begin
        sx[r] = 0;
        for (int k = 0; k < dx_len[r]; k++) sx[r] ^= ebz[dx_col[r][k]];
      end
      for (int r = 0; r < MZ; r++) begin
        sz[r] = 0;
        for (int k = 0; k < dz_len[r]; k++) sz[r] ^= ebx[dz_col[r][k]];
      end
    endfunction

    function bit z_ok(bit ebx[], bit sz[]);
      for (int r = 0; r < MZ; r++) begin
        bit p;
        p = sz[r];
        for (int k = 0; k < dz_len[r]; k++) p ^= ebx[dz_col[r][k]];
        if (p) return 0;
      end
      return 1;
    endfunction
  endclass

endpackage
