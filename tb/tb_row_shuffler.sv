// tb_row_shuffler: every order handed out must be a permutation of 0..M-1, a new one
// must be ready M-1 clocks after each swap, consecutive orders must differ, and two
// shufflers with different seeds must give different orders.
module tb_row_shuffler;
  localparam int M = 37;

  logic clk = 0, rst_n = 0;
  logic swap_a = 0, swap_b = 0, ready_a, ready_b;
  logic [5:0] addr = 0, row_a, row_b;
  int checks = 0, failures = 0;
  int cyc = 0, swap_cyc = 0, ready_at = 0;
  logic ready_q = 0;

  // the clock in which the swap was taken and the first clock that sees ready again
  always @(posedge clk) begin
    cyc++;
    if (swap_a) swap_cyc = cyc;
    if (ready_a && !ready_q) ready_at = cyc;
    ready_q = ready_a;
  end

  always #5 clk = ~clk;

  row_shuffler #(.M(M)) dut_a (.clk, .rst_n, .seed(32'd12345), .swap(swap_a), .ready(ready_a),
                               .rd_addr(addr), .rd_row(row_a));
  row_shuffler #(.M(M)) dut_b (.clk, .rst_n, .seed(32'd777),   .swap(swap_b), .ready(ready_b),
                               .rd_addr(addr), .rd_row(row_b));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev [M];
    int cur  [M];
    int other[M];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      while (!ready_a) @(posedge clk);
      @(posedge clk);
      // one swap per clock: ready returns M-1 clocks after the swap clock
      if (it > 0) check(ready_at - swap_cyc == M, $sformatf("ready seen %0d clocks after swap", ready_at - swap_cyc));
      @(negedge clk);
      swap_a = 1; swap_b = 1;
      @(negedge clk);
      swap_a = 0; swap_b = 0;
      begin
        bit seen [M];
        bit same, same_other;
        foreach (seen[i]) seen[i] = 0;
        for (int i = 0; i < M; i++) begin
          addr = 6'(i);
          #1;
          cur[i]   = int'(row_a);
          other[i] = int'(row_b);
          if (row_a < M) seen[row_a] = 1;
        end
        for (int i = 0; i < M; i++) check(seen[i], $sformatf("row %0d missing in order %0d", i, it));
        same = 1; same_other = 1;
        for (int i = 0; i < M; i++) begin
          if (cur[i] != prev[i]) same = 0;
          if (cur[i] != other[i]) same_other = 0;
        end
        if (it > 0) check(!same, "order repeated");
        check(!same_other, "different seeds gave the same order");
        prev = cur;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
