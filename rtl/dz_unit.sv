// dz_unit: the D_Z processing unit of the GARI decoder, with the early-stopping test.
//
// It runs a serial_unit on D_Z (columns e_bar_X) and, when a pass ends, takes a
// snapshot of the hard decisions e_bar_X[i] = (b_in[i] + S[i] < 0), i.e. the sign of
// the posterior LLR of every e_bar_X column, and hands it to a syndrome_checker. The
// check of iteration t therefore runs while iteration t+1 is being decoded; its
// result (chk_valid pulse with chk_ok and chk_weight) arrives M+2 clocks after the
// pass of iteration t ended, before the next pass can end. hd_out keeps the
// snapshot that was checked until the following snapshot is taken.
//
// Interface and timing of the decoding ports are those of serial_unit; pass_done
// pulses when the D_Z pass ends. `cancel` stops the pass and cancels the test.
// Configuration writes with cfg_sel = CFG_DZ_ROW go to both the serial unit and the
// checker; CFG_WT_XBAR goes to the checker.
// Follows the paper: D_Z unit with serial schedule, stop test D_Z e_bar_X = s_Z, and
// e_bar_X as the decoder's output. This design's choice: overlapping the test with
// the next iteration instead of spending an extra pass on it.
module dz_unit
  import gari_pkg::*;
#(
  parameter int unsigned M           = 936,
  parameter int unsigned N           = 8784,
  parameter int unsigned W_MAX       = 48,
  parameter int unsigned PIPE        = 10,
  parameter int unsigned ALPHA_SHIFT = 5,
  parameter int unsigned WT_W        = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  idx_t                        cfg_addr,
  input  logic [$clog2(W_MAX+1)-1:0]  cfg_len,
  input  idx_t                        cfg_data [W_MAX],
  input  logic                        clear,
  input  logic [M-1:0]                syn,
  input  logic                        start,
  input  logic                        cancel,
  output logic                        pass_done,
  output logic                        busy,
  output logic                        ord_swap,
  input  logic                        ord_ready,
  output logic [$clog2(M)-1:0]        ord_addr,
  input  logic [$clog2(M)-1:0]        ord_row,
  input  msg_t                        b_in  [N],
  output app_t                        s_out [N],
  output logic                        chk_valid,
  output logic                        chk_ok,
  output logic [WT_W-1:0]             chk_weight,
  output logic                        chk_busy,
  output logic [N-1:0]                hd_out
);

  logic           ser_done;
  logic           ser_busy;
  app_t           s_int [N];
  logic [N-1:0]   hd_snap;
  logic           chk_start;
  logic           chk_run;

  serial_unit #(.M(M), .N(N), .W_MAX(W_MAX), .PIPE(PIPE), .ALPHA_SHIFT(ALPHA_SHIFT)) u_ser (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_sel == CFG_DZ_ROW), .cfg_row(cfg_addr[$clog2(M)-1:0]),
    .cfg_len, .cfg_cols(cfg_data),
    .clear, .syn, .start, .cancel, .done(ser_done), .busy(ser_busy),
    .ord_swap, .ord_ready, .ord_addr, .ord_row,
    .b_in, .s_out(s_int)
  );

  assign s_out     = s_int;
  assign pass_done = ser_done;
  assign busy      = ser_busy;
  assign hd_out    = hd_snap;
  assign chk_busy  = ser_done || chk_start || chk_run;

  // snapshot of the hard decisions at the end of each pass
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd_snap   <= '0;
      chk_start <= 1'b0;
      chk_run   <= 1'b0;
    end else begin
      chk_start <= ser_done && !cancel;
      if (ser_done) begin
        for (int i = 0; i < int'(N); i++)
          hd_snap[i] <= add_app(app_t'(b_in[i]), s_int[i]) < 0;
      end
      if (cancel)         chk_run <= 1'b0;
      else if (chk_start) chk_run <= 1'b1;
      else if (chk_valid) chk_run <= 1'b0;
    end
  end

  syndrome_checker #(.M(M), .N(N), .W_MAX(W_MAX), .WT_W(WT_W)) u_chk (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_len, .cfg_data,
    .syn, .hd(hd_snap), .start(chk_start), .cancel,
    .done(chk_valid), .ok(chk_ok), .weight(chk_weight)
  );

  // The snapshot must not be replaced while it is being checked.
  assert property (@(posedge clk) disable iff (!rst_n) ser_done |-> !(chk_start || chk_run))
    else $error("dz_unit: pass ended while the previous estimate was still being checked");

endmodule
