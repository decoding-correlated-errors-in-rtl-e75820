// tb_ensemble_selector: feeds rounds of per-member check results and compares the
// selector's decision with a direct computation: nothing happens while no member
// converged (unless it was the last iteration: then failure with member 0's estimate),
// otherwise the converged member of smallest weight wins (lowest index on equal
// weights), its estimate is returned, halt pulses, and later results are ignored
// until the next start. Ties and the failure case are forced to occur.
module tb_ensemble_selector;
  localparam int E = 5, NX = 16, ITW = 4;

  logic clk = 0, rst_n = 0, start = 0;
  logic [E-1:0] chk_valid = '0, chk_ok = '0, chk_last = '0;
  logic [31:0] chk_weight [E];
  logic [ITW-1:0] chk_iter [E];
  logic [NX-1:0] hd [E];
  logic halt, done, success;
  logic [2:0] winner, n_conv;
  logic [ITW-1:0] iterations;
  logic [NX-1:0] e_x_hat;
  int checks = 0, failures = 0, n_tie = 0, n_fail = 0, n_win = 0;

  always #5 clk = ~clk;

  ensemble_selector #(.E(E), .N_X(NX), .ITW(ITW)) dut (
    .clk, .rst_n, .start, .chk_valid, .chk_ok, .chk_last, .chk_weight, .chk_iter, .hd,
    .halt, .done, .success, .winner, .n_conv, .iterations, .e_x_hat);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int dec = 0; dec < 60; dec++) begin
      bit decided;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      decided = 0;
      for (int it = 1; it <= 6 && !decided; it++) begin
        int best, nok;
        bit last, tie;
        last = (it == 6);
        nok = 0; best = -1; tie = 0;
        for (int m = 0; m < E; m++) begin
          chk_ok[m]     = (dec % 7 == 3) ? 1'b0 : 1'($urandom_range(0, 9) < 2);
          chk_weight[m] = (dec % 5 == 1) ? 32'd50 : 32'($urandom_range(0, 20));
          chk_iter[m]   = ITW'(it);
          hd[m]         = NX'($urandom);
          chk_last[m]   = last;
        end
        for (int m = 0; m < E; m++) if (chk_ok[m]) begin
          nok++;
          if (best < 0 || chk_weight[m] < chk_weight[best]) best = m;
        end
        for (int m = 0; m < E; m++)
          if (chk_ok[m] && m != best && chk_weight[m] == chk_weight[best]) tie = 1;
        chk_valid = '1;
        @(negedge clk);
        chk_valid = '0;
        if (nok > 0) begin
          check(done && halt && success, $sformatf("dec %0d it %0d: no success decision", dec, it));
          check(int'(winner) == best, $sformatf("winner %0d exp %0d", winner, best));
          check(int'(n_conv) == nok, "n_conv");
          check(e_x_hat == hd[best], "e_x_hat is not the winner's estimate");
          check(int'(iterations) == it, "iterations");
          if (tie) n_tie++;
          n_win++;
          decided = 1;
        end else if (last) begin
          check(done && halt && !success, "no failure decision at the last iteration");
          check(e_x_hat == hd[0], "failure output is not member 0's estimate");
          n_fail++;
          decided = 1;
        end else begin
          check(!done && !halt, "decision without a converged member");
        end
      end
      // results after the decision are ignored
      chk_ok = '1; chk_valid = '1;
      @(negedge clk);
      chk_valid = '0;
      check(!done && !halt, "decision after the ensemble had stopped");
    end
    check(n_tie > 0, "no tie between converged members occurred");
    check(n_fail > 0, "no max-iteration failure occurred");
    check(n_win > 0, "no convergence occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
