// gari_ensemble_top: GARI-NMS ensemble decoder for a correlated detector error model.
//
// E copies of gari_decoder decode the same syndrome on the same GARI graph; they
// differ only in the seed of their random serial schedule. The ensemble_selector
// stops all of them as soon as one converges and returns the most likely of the
// estimates that converged in that iteration. The result is e_x_hat, the estimate of
// e_bar_X = e_X + V e_Y: the X-part of the error, Y errors included, which is what a
// memory experiment protecting logical Z observables needs.
//
// Use: after reset, write the graph and the priors through the configuration port
// (cfg_sel selects the table, see gari_pkg; each write is broadcast to all members;
// every row table entry must be written once). Then for each decoding present s_x
// and s_z with a one-clock `start` while !busy; `done` pulses with success, winner,
// iterations, n_conv and e_x_hat, which hold until the next start. busy drops about
// PIPE clocks later, when all members have written back the rows in flight.
// Member m uses the seed SEED + m * 0x9E3779B9.
// Follows the paper: ensemble of E = 24 decoders in parallel, minimum-latency
// stopping, the [[144,12,12]] sizes of Table 1 as defaults. This design's choices:
// the configuration port, the seeds and a single clock domain.
module gari_ensemble_top
  import gari_pkg::*;
#(
  parameter int unsigned E           = 24,
  parameter int unsigned M_X         = 792,
  parameter int unsigned N_Z         = 7920,
  parameter int unsigned M_Z         = 936,
  parameter int unsigned N_X         = 8784,
  parameter int unsigned N_Y         = 51048,
  parameter int unsigned W_MAX       = 48,
  parameter int unsigned YDEG        = 16,
  parameter int unsigned LANES       = 8784,
  parameter int unsigned PIPE        = 10,
  parameter int unsigned ALPHA_SHIFT = 5,
  parameter int unsigned MAX_ITER    = 400,
  parameter int unsigned WT_W        = 32,
  parameter logic [31:0] SEED        = 32'h1234_5678,
  parameter int unsigned ITW         = $clog2(MAX_ITER + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  idx_t                        cfg_addr,
  input  logic [$clog2(W_MAX+1)-1:0]  cfg_len,
  input  idx_t                        cfg_data [W_MAX],
  input  logic                        start,
  input  logic [M_X-1:0]              s_x,
  input  logic [M_Z-1:0]              s_z,
  output logic                        busy,
  output logic                        done,
  output logic                        success,
  output logic [$clog2(E+1)-1:0]      winner,
  output logic [$clog2(E+1)-1:0]      n_conv,
  output logic [ITW-1:0]              iterations,
  output logic [N_X-1:0]              e_x_hat
);

  logic [E-1:0]    m_busy;
  logic [E-1:0]    chk_valid, chk_ok, chk_last;
  logic [WT_W-1:0] chk_weight [E];
  logic [ITW-1:0]  chk_iter   [E];
  logic [N_X-1:0]  hd         [E];
  logic            halt;

  for (genvar m = 0; m < int'(E); m++) begin : g_member
    gari_decoder #(
      .M_X(M_X), .N_Z(N_Z), .M_Z(M_Z), .N_X(N_X), .N_Y(N_Y), .W_MAX(W_MAX), .YDEG(YDEG),
      .LANES(LANES), .PIPE(PIPE), .ALPHA_SHIFT(ALPHA_SHIFT), .MAX_ITER(MAX_ITER),
      .WT_W(WT_W), .ITW(ITW)
    ) u_dec (
      .clk, .rst_n,
      .seed(SEED + 32'(m) * 32'h9E37_79B9),
      .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
      .start, .s_x, .s_z, .halt,
      .busy(m_busy[m]),
      .chk_valid(chk_valid[m]), .chk_ok(chk_ok[m]), .chk_last(chk_last[m]),
      .chk_weight(chk_weight[m]), .chk_iter(chk_iter[m]), .hd(hd[m])
    );
  end

  ensemble_selector #(.E(E), .N_X(N_X), .WT_W(WT_W), .ITW(ITW)) u_sel (
    .clk, .rst_n, .start,
    .chk_valid, .chk_ok, .chk_last, .chk_weight, .chk_iter, .hd,
    .halt, .done, .success, .winner, .n_conv, .iterations, .e_x_hat
  );

  assign busy = |m_busy;

endmodule
