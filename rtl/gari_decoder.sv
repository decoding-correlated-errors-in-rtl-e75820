// gari_decoder: one GARI-NMS decoder (one member of the ensemble).
//
// The GARI matrix has two top blocks, D_X (rows: X detectors, columns e_bar_Z) and
// D_Z (rows: Z detectors, columns e_bar_X), and a bottom part that ties e_bar_Z and
// e_bar_X to the original error variables e_Z, e_X, e_Y. Three units share the work:
// the bottom_unit (two layers, all rows of a layer at once), and the D_X unit
// (serial_unit) and D_Z unit (dz_unit), which each visit their rows one per clock in
// a random order from their own row_shuffler. One iteration is: bottom part first,
// then D_X and D_Z side by side; it ends when both serial passes have ended. The
// bottom part goes first because the e_bar columns start with zero prior, so the
// top units would have nothing to work on.
//
// After every iteration the D_Z unit tests D_Z e_bar_X = s_Z on the hard decisions
// of that iteration while the next iteration runs; the result comes out as a
// chk_valid pulse with chk_ok, chk_weight (prior weight of the estimate, smaller is
// more likely), chk_iter (the iteration it belongs to, 1-based) and hd (the tested
// e_bar_X). The decoder itself never stops on success: whoever watches the checks
// (the ensemble_selector) raises `halt`. The decoder stops by itself after MAX_ITER
// iterations; chk_last marks the check of that last iteration.
//
// Timing: `start` (while !busy) latches s_x and s_z and clears all messages. An
// iteration takes GU + GV + max(M_X, M_Z) + PIPE + 5 clocks: one to start the bottom
// unit, GU + GV row-group clocks (2 with full lanes), one for its done, one to start
// the top units, max(M_X, M_Z) + PIPE + 1 for the serial passes, one to hand over.
// With the defaults that is 953 clocks. `halt` aborts the serial passes and the
// running test; busy drops once the rows in flight are written back.
// Follows the paper (Fig. 3 and the hybrid schedule): the three units, their order,
// bottom first, stop test on D_Z only, maximum of 400 iterations. This design's
// choices: a single clock for all units, the hand-over clocks, and how stopping is
// split between decoder and ensemble.
module gari_decoder
  import gari_pkg::*;
#(
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
  parameter int unsigned ITW         = $clog2(MAX_ITER + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [31:0]                 seed,
  // configuration (broadcast to every unit)
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  idx_t                        cfg_addr,
  input  logic [$clog2(W_MAX+1)-1:0]  cfg_len,
  input  idx_t                        cfg_data [W_MAX],
  // one decoding
  input  logic                        start,
  input  logic [M_X-1:0]              s_x,
  input  logic [M_Z-1:0]              s_z,
  input  logic                        halt,
  output logic                        busy,
  output logic                        chk_valid,
  output logic                        chk_ok,
  output logic                        chk_last,
  output logic [WT_W-1:0]             chk_weight,
  output logic [ITW-1:0]              chk_iter,
  output logic [N_X-1:0]              hd
);

  typedef enum logic [2:0] {D_IDLE, D_CLEAR, D_BOTTOM, D_TOP, D_WAIT_TOP, D_FINAL, D_FLUSH} state_e;
  state_e st;

  logic [M_X-1:0] syn_x;
  logic [M_Z-1:0] syn_z;
  logic [ITW-1:0] iter;
  logic           clear;
  logic           bot_start, bot_done, bot_busy;
  logic           top_start;
  logic           dx_done, dx_busy, dx_seen;
  logic           dz_done, dz_busy, dz_seen;
  logic           chk_busy;

  msg_t bz [N_Z];
  msg_t bx [N_X];
  app_t sz [N_Z];
  app_t sx [N_X];

  // row orders
  logic                    dx_swap, dx_ready, dz_swap, dz_ready;
  logic [$clog2(M_X)-1:0]  dx_addr, dx_row;
  logic [$clog2(M_Z)-1:0]  dz_addr, dz_row;

  row_shuffler #(.M(M_X)) u_shuf_x (
    .clk, .rst_n, .seed(seed ^ 32'h5BD1_E995), .swap(dx_swap), .ready(dx_ready),
    .rd_addr(dx_addr), .rd_row(dx_row)
  );
  row_shuffler #(.M(M_Z)) u_shuf_z (
    .clk, .rst_n, .seed(seed), .swap(dz_swap), .ready(dz_ready),
    .rd_addr(dz_addr), .rd_row(dz_row)
  );

  bottom_unit #(.NZ(N_Z), .NX(N_X), .NY(N_Y), .YDEG(YDEG), .LANES(LANES), .W_MAX(W_MAX),
                .ALPHA_SHIFT(ALPHA_SHIFT)) u_bottom (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
    .clear, .start(bot_start), .done(bot_done), .busy(bot_busy),
    .tz_in(sz), .tx_in(sx), .bz_out(bz), .bx_out(bx)
  );

  serial_unit #(.M(M_X), .N(N_Z), .W_MAX(W_MAX), .PIPE(PIPE), .ALPHA_SHIFT(ALPHA_SHIFT)) u_dx (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_sel == CFG_DX_ROW), .cfg_row(cfg_addr[$clog2(M_X)-1:0]),
    .cfg_len, .cfg_cols(cfg_data),
    .clear, .syn(syn_x), .start(top_start), .cancel(halt), .done(dx_done), .busy(dx_busy),
    .ord_swap(dx_swap), .ord_ready(dx_ready), .ord_addr(dx_addr), .ord_row(dx_row),
    .b_in(bz), .s_out(sz)
  );

  dz_unit #(.M(M_Z), .N(N_X), .W_MAX(W_MAX), .PIPE(PIPE), .ALPHA_SHIFT(ALPHA_SHIFT),
            .WT_W(WT_W)) u_dz (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
    .clear, .syn(syn_z), .start(top_start), .cancel(halt), .pass_done(dz_done), .busy(dz_busy),
    .ord_swap(dz_swap), .ord_ready(dz_ready), .ord_addr(dz_addr), .ord_row(dz_row),
    .b_in(bx), .s_out(sx),
    .chk_valid, .chk_ok, .chk_weight, .chk_busy, .hd_out(hd)
  );

  assign busy      = (st != D_IDLE);
  assign chk_iter  = iter;
  assign chk_last  = chk_valid && (iter == ITW'(MAX_ITER));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= D_IDLE;
      iter      <= '0;
      clear     <= 1'b0;
      bot_start <= 1'b0;
      top_start <= 1'b0;
      dx_seen   <= 1'b0;
      dz_seen   <= 1'b0;
      syn_x     <= '0;
      syn_z     <= '0;
    end else begin
      clear     <= 1'b0;
      bot_start <= 1'b0;
      top_start <= 1'b0;
      if (dx_done) dx_seen <= 1'b1;
      if (dz_done) dz_seen <= 1'b1;
      if (halt && st != D_IDLE) begin
        st <= D_FLUSH;
      end else begin
        case (st)
          D_IDLE:
            if (start) begin
              syn_x <= s_x;
              syn_z <= s_z;
              iter  <= '0;
              clear <= 1'b1;
              st    <= D_CLEAR;
            end
          D_CLEAR: begin
            bot_start <= 1'b1;
            st        <= D_BOTTOM;
          end
          D_BOTTOM:
            if (bot_done) begin
              top_start <= 1'b1;
              dx_seen   <= 1'b0;
              dz_seen   <= 1'b0;
              st        <= D_WAIT_TOP;
            end
          D_WAIT_TOP:
            if ((dx_seen || dx_done) && (dz_seen || dz_done)) begin
              iter <= iter + 1'b1;
              if (iter + 1'b1 == ITW'(MAX_ITER)) begin
                st <= D_FINAL;
              end else begin
                bot_start <= 1'b1;
                st        <= D_BOTTOM;
              end
            end
          D_FINAL:
            if (chk_valid) st <= D_FLUSH;
          D_FLUSH:
            if (!bot_busy && !dx_busy && !dz_busy && !chk_busy && !bot_start && !top_start)
              st <= D_IDLE;
          default: st <= D_IDLE;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> st == D_IDLE)
    else $error("gari_decoder: start while busy");

endmodule
