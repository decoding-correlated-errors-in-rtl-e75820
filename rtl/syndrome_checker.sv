// syndrome_checker: early-stopping test D_Z * e_bar_X = s_Z and prior weight of the
// estimate.
//
// At `start` the hard decisions hd (the estimated e_bar_X, one bit per D_Z column)
// must be stable; the checker then reads one D_Z row per clock from its own copy of
// the row structure, XORs the hard decisions of the row's columns with the row's
// syndrome bit, and records any row left unsatisfied. In the same clocks it adds up
// the weight sum_i hd[i] * wt[i], CPC = ceil(N/M) columns per clock, where wt[i] is
// the prior LLR log((1-p_i)/p_i) of e_bar_X[i] taken from the Z-only error model. A
// smaller weight means a more likely error; the ensemble uses it to choose between
// members that converge in the same iteration.
//
// Timing: `done` pulses M clocks after `start`, with `ok` (all M checks satisfied)
// and `weight` valid from then until the next start. `cancel` cancels a running
// check (no done) and wins over a start in the same clock. Configuration: CFG_DZ_ROW rows
// (cfg_addr = row) and CFG_WT_XBAR weights (cfg_len entries from cfg_addr).
// Follows the paper: stop on D_Z e_bar_X = s_Z only; likelihood from the priors of
// e_bar_X. This design's choices: a separate row-structure copy, so the test of one
// iteration's estimate can run while the next iteration is already being decoded,
// and the weight arithmetic (unsigned sums of non-negative LLRs).
module syndrome_checker
  import gari_pkg::*;
#(
  parameter int unsigned M     = 936,
  parameter int unsigned N     = 8784,
  parameter int unsigned W_MAX = 48,
  parameter int unsigned WT_W  = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  idx_t                        cfg_addr,
  input  logic [$clog2(W_MAX+1)-1:0]  cfg_len,
  input  idx_t                        cfg_data [W_MAX],
  input  logic [M-1:0]                syn,
  input  logic [N-1:0]                hd,
  input  logic                        start,
  input  logic                        cancel,
  output logic                        done,
  output logic                        ok,
  output logic [WT_W-1:0]             weight
);

  localparam int unsigned CPC = (N + M - 1) / M;
  localparam int unsigned RW  = $clog2(M);
  localparam int unsigned LW  = $clog2(W_MAX+1);

  logic [LW-1:0]   len_mem [M];
  idx_t            col_mem [M][W_MAX];
  logic [MSG_W-2:0] wt     [N];

  logic            run;
  logic [RW-1:0]   r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      r      <= '0;
      done   <= 1'b0;
      ok     <= 1'b0;
      weight <= '0;
    end else begin
      done <= 1'b0;
      if (cancel) begin
        run <= 1'b0;
      end else if (start) begin
        run    <= 1'b1;
        r      <= '0;
        ok     <= 1'b1;
        weight <= '0;
      end else if (run) begin
        logic            par;
        logic [WT_W-1:0] w;
        par = syn[r];
        for (int k = 0; k < int'(W_MAX); k++)
          if (k < int'(len_mem[r])) par ^= hd[col_mem[r][k]];
        w = weight;
        for (int c = 0; c < int'(CPC); c++) begin
          int i;
          i = int'(r) * int'(CPC) + c;
          if (i < int'(N) && hd[i]) w = w + WT_W'(wt[i]);
        end
        if (par) ok <= 1'b0;
        weight <= w;
        if (r == RW'(M-1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          r <= r + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (cfg_sel == CFG_DZ_ROW) begin
        len_mem[cfg_addr] <= cfg_len;
        col_mem[cfg_addr] <= cfg_data;
      end else if (cfg_sel == CFG_WT_XBAR) begin
        for (int k = 0; k < int'(W_MAX); k++)
          if (k < int'(cfg_len) && int'(cfg_addr) + k < int'(N)) begin
            msg_t v;
            v = msg_t'(cfg_data[k]);
            wt[int'(cfg_addr) + k] <= v[MSG_W-1] ? '0 : v[MSG_W-2:0];
          end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !cancel |-> !run)
    else $error("syndrome_checker: start while a check is running");

endmodule
