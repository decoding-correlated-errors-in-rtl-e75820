// tb_nms_cnp: checks the normalized min-sum check-node processor against a direct
// computation: for every output k, the sign is the syndrome bit XOR the signs of all
// other valid inputs, and the magnitude is the smallest magnitude among the other
// valid inputs times alpha = 1 - 2^-s (computed as m - floor(m / 2^s)). Random rows
// of random weight, both alpha settings of the paper (s = 5 and s = 7), and ties.
module tb_nms_cnp;
  import gari_pkg::*;

  localparam int W = 8;

  msg_t           v2c [W];
  logic [3:0]     len;
  logic           syn;
  msg_t           c2v5 [W];
  msg_t           c2v7 [W];
  int             checks = 0, failures = 0;

  nms_cnp #(.W(W), .ALPHA_SHIFT(5)) dut5 (.v2c, .len, .syn, .c2v(c2v5));
  nms_cnp #(.W(W), .ALPHA_SHIFT(7)) dut7 (.v2c, .len, .syn, .c2v(c2v7));

  function automatic int expect_out(int k, int s);
    int m, sg, a;
    m  = 2047;
    sg = syn;
    for (int j = 0; j < int'(len); j++) if (j != k) begin
      a = (v2c[j] < 0) ? -int'(v2c[j]) : int'(v2c[j]);
      if (a < m) m = a;
      sg ^= (v2c[j] < 0);
    end
    m = m - (m >> s);
    return sg ? -m : m;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      len = 4'($urandom_range(1, W));
      syn = 1'($urandom);
      for (int k = 0; k < W; k++) begin
        int v;
        v = (t % 4 == 0) ? int'($urandom_range(0, 8)) : int'($urandom_range(0, 2047));
        if ($urandom_range(0, 1) == 1) v = -v;
        v2c[k] = msg_t'(v);
      end
      #1;
      for (int k = 0; k < W; k++) begin
        int e5, e7;
        e5 = (k < int'(len)) ? expect_out(k, 5) : 0;
        e7 = (k < int'(len)) ? expect_out(k, 7) : 0;
        checks += 2;
        if (int'(c2v5[k]) != e5) begin
          failures++;
          if (failures < 10) $display("mismatch a5 t=%0d k=%0d got %0d exp %0d", t, k, c2v5[k], e5);
        end
        if (int'(c2v7[k]) != e7) begin
          failures++;
          if (failures < 10) $display("mismatch a7 t=%0d k=%0d got %0d exp %0d", t, k, c2v7[k], e7);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
