// ensemble_selector: early stopping of the whole ensemble and choice of its output.
//
// All E decoders run in lock-step, so their per-iteration check results arrive in
// the same clock (asserted). When they do, the selector looks at the members whose
// estimate satisfied D_Z e_bar_X = s_Z. If there is at least one, the ensemble is
// done: the member with the smallest prior weight (the most likely error) wins, the
// lowest index on equal weights, its e_bar_X is latched as the result, and `halt`
// stops every member. If none converged and it was the last allowed iteration, the
// ensemble is done without success and member 0's estimate is returned.
//
// Timing: `start` arms the selector for a new decoding. The result (done pulse,
// success, winner, iterations, n_conv = how many members converged in the deciding
// iteration, e_x_hat) is registered in the clock after the check results arrive;
// halt pulses in that same clock. Outputs hold until the next start.
// Follows the paper: stop as soon as one member converges; among members converging
// in the same iteration take the most likely error under the priors. This design's
// choices: the tie rule between equal weights and the failure output.
module ensemble_selector #(
  parameter int unsigned E    = 24,
  parameter int unsigned N_X  = 8784,
  parameter int unsigned WT_W = 32,
  parameter int unsigned ITW  = 9
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [E-1:0]           chk_valid,
  input  logic [E-1:0]           chk_ok,
  input  logic [E-1:0]           chk_last,
  input  logic [WT_W-1:0]        chk_weight [E],
  input  logic [ITW-1:0]         chk_iter   [E],
  input  logic [N_X-1:0]         hd         [E],
  output logic                   halt,
  output logic                   done,
  output logic                   success,
  output logic [$clog2(E+1)-1:0] winner,
  output logic [$clog2(E+1)-1:0] n_conv,
  output logic [ITW-1:0]         iterations,
  output logic [N_X-1:0]         e_x_hat
);

  localparam int unsigned EW = $clog2(E+1);

  logic            armed;
  logic            any_ok;
  logic [EW-1:0]   best;
  logic [EW-1:0]   cnt;
  logic [WT_W-1:0] best_w;

  // arg-min of the weight over the converged members
  always_comb begin
    any_ok = 1'b0;
    best   = '0;
    best_w = '1;
    cnt    = '0;
    for (int m = 0; m < int'(E); m++) begin
      if (chk_ok[m]) begin
        cnt = cnt + 1'b1;
        if (!any_ok || chk_weight[m] < best_w) begin
          best   = EW'(m);
          best_w = chk_weight[m];
        end
        any_ok = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed      <= 1'b0;
      halt       <= 1'b0;
      done       <= 1'b0;
      success    <= 1'b0;
      winner     <= '0;
      n_conv     <= '0;
      iterations <= '0;
      e_x_hat    <= '0;
    end else begin
      halt <= 1'b0;
      done <= 1'b0;
      if (start) begin
        armed   <= 1'b1;
        success <= 1'b0;
      end else if (armed && chk_valid[0]) begin
        if (any_ok) begin
          armed      <= 1'b0;
          halt       <= 1'b1;
          done       <= 1'b1;
          success    <= 1'b1;
          winner     <= best;
          n_conv     <= cnt;
          iterations <= chk_iter[0];
          e_x_hat    <= hd[best];
        end else if (chk_last[0]) begin
          armed      <= 1'b0;
          halt       <= 1'b1;
          done       <= 1'b1;
          success    <= 1'b0;
          winner     <= '0;
          n_conv     <= '0;
          iterations <= chk_iter[0];
          e_x_hat    <= hd[0];
        end
      end
    end
  end

  // The members must deliver their checks in the same clock.
  assert property (@(posedge clk) disable iff (!rst_n) chk_valid[0] |-> &chk_valid)
    else $error("ensemble_selector: members out of lock-step");
  assert property (@(posedge clk) disable iff (!rst_n) !chk_valid[0] |-> chk_valid == '0)
    else $error("ensemble_selector: members out of lock-step");

endmodule
