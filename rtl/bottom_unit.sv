// bottom_unit: layered normalized min-sum on the bottom part of the GARI matrix.
//
// The bottom part has one row per e_bar_Z column (first layer, "U rows") and one row
// per e_bar_X column (second layer, "V rows"). U row i connects e_Z[i], e_bar_Z[i]
// and every e_Y[j] with U[i][j] = 1; V row i connects e_X[i], e_bar_X[i] and every
// e_Y[j] with V[i][j] = 1. All these rows have syndrome 0. Because every column of U
// (and of V) holds a single 1, the rows of one layer share no column and can all be
// processed at the same time.
//
// Messages kept here: the prior LLRs of e_Z, e_X, e_Y (the decoder's input), cU[j]
// and cV[j], the messages the U and V rows send to e_Y[j], and bz[i], bx[i], the
// messages sent to e_bar_Z[i] and e_bar_X[i] (outputs to the D_X and D_Z units).
// The message an e_Y node sends to its U row is prior + cV (its only other edge),
// and to its V row prior + cU. e_Z[i] and e_X[i] have no other edge, so they send
// their prior. e_bar_Z[i] sends tz_in[i], the sum of its D_X messages (from the D_X
// unit), and e_bar_X[i] sends tx_in[i].
//
// Timing: after `start`, the U layer is processed in ceil(NZ/LANES) clocks and the V
// layer in ceil(NX/LANES) clocks, LANES rows per clock, without pipelining; `done`
// pulses one clock after the last group. With LANES equal to the larger layer, as in
// the paper, that is one clock per layer (a long clock: the paper runs this unit
// over 20 times slower than the serial units). `clear` forgets all messages.
// Configuration: CFG_U_ROW/CFG_V_ROW write a row's e_Y list (cfg_addr = row),
// CFG_PRIOR_Z/X/Y write cfg_len priors from index cfg_addr on.
// Follows the paper: two layers, U before V, one check-node processor per row of the
// larger layer, zero prior for e_bar columns, no pipelining. This design's choices:
// the row-list storage with at most YDEG e_Y entries per row, and the message storage.
module bottom_unit
  import gari_pkg::*;
#(
  parameter int unsigned NZ          = 7920,
  parameter int unsigned NX          = 8784,
  parameter int unsigned NY          = 51048,
  parameter int unsigned YDEG        = 16,
  parameter int unsigned LANES       = 8784,
  parameter int unsigned W_MAX       = 48,
  parameter int unsigned ALPHA_SHIFT = 5
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  idx_t                        cfg_addr,
  input  logic [$clog2(W_MAX+1)-1:0]  cfg_len,
  input  idx_t                        cfg_data [W_MAX],
  // decoding
  input  logic                        clear,
  input  logic                        start,
  output logic                        done,
  output logic                        busy,
  // messages exchanged with the D_X and D_Z units
  input  app_t                        tz_in  [NZ],
  input  app_t                        tx_in  [NX],
  output msg_t                        bz_out [NZ],
  output msg_t                        bx_out [NX]
);

  localparam int unsigned GU = (NZ + LANES - 1) / LANES;
  localparam int unsigned GV = (NX + LANES - 1) / LANES;
  localparam int unsigned GW = $clog2(((GU > GV) ? GU : GV) + 1);
  localparam int unsigned DW = $clog2(YDEG+1);

  typedef logic [DW-1:0] deg_t;

  // structure
  deg_t ulen  [NZ];
  idx_t ulist [NZ][YDEG];
  deg_t vlen  [NX];
  idx_t vlist [NX][YDEG];
  // priors
  msg_t pz [NZ];
  msg_t px [NX];
  msg_t py [NY];
  // messages
  msg_t cU [NY];
  msg_t cV [NY];
  msg_t bz [NZ];
  msg_t bx [NX];

  assign bz_out = bz;
  assign bx_out = bx;

  typedef enum logic [1:0] {B_IDLE, B_LAYER_U, B_LAYER_V} state_e;
  state_e         st;
  logic [GW-1:0]  grp;

  assign busy = (st != B_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= B_IDLE;
      grp  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        B_IDLE: if (start) begin st <= B_LAYER_U; grp <= '0; end
        B_LAYER_U:
          if (grp == GW'(GU-1)) begin st <= B_LAYER_V; grp <= '0; end
          else grp <= grp + 1'b1;
        B_LAYER_V:
          if (grp == GW'(GV-1)) begin st <= B_IDLE; done <= 1'b1; end
          else grp <= grp + 1'b1;
        default: st <= B_IDLE;
      endcase
    end
  end

  // message-passing datapath: LANES check-node processors working on one row group
  always_ff @(posedge clk) begin
    if (clear) begin
      for (int j = 0; j < int'(NY); j++) begin cU[j] <= '0; cV[j] <= '0; end
      for (int i = 0; i < int'(NZ); i++) bz[i] <= '0;
      for (int i = 0; i < int'(NX); i++) bx[i] <= '0;
    end else if (st == B_LAYER_U) begin
      for (int l = 0; l < int'(LANES); l++) begin
        int       i;
        cnp_acc_t acc;
        msg_t     vb;
        i = int'(grp) * int'(LANES) + l;
        if (i < int'(NZ)) begin
          vb  = sat_msg(tz_in[i]);
          acc = cnp_init(1'b0);
          acc = cnp_acc(acc, pz[i], idx_t'(0));
          acc = cnp_acc(acc, vb, idx_t'(1));
          for (int k = 0; k < int'(YDEG); k++)
            if (k < int'(ulen[i]))
              acc = cnp_acc(acc, sat_msg(add_app(app_t'(py[ulist[i][k]]), app_t'(cV[ulist[i][k]]))), idx_t'(k+2));
          bz[i] <= cnp_out(acc, vb, idx_t'(1), ALPHA_SHIFT);
          for (int k = 0; k < int'(YDEG); k++)
            if (k < int'(ulen[i]))
              cU[ulist[i][k]] <= cnp_out(acc,
                  sat_msg(add_app(app_t'(py[ulist[i][k]]), app_t'(cV[ulist[i][k]]))),
                  idx_t'(k+2), ALPHA_SHIFT);
        end
      end
    end else if (st == B_LAYER_V) begin
      for (int l = 0; l < int'(LANES); l++) begin
        int       i;
        cnp_acc_t acc;
        msg_t     vb;
        i = int'(grp) * int'(LANES) + l;
        if (i < int'(NX)) begin
          vb  = sat_msg(tx_in[i]);
          acc = cnp_init(1'b0);
          acc = cnp_acc(acc, px[i], idx_t'(0));
          acc = cnp_acc(acc, vb, idx_t'(1));
          for (int k = 0; k < int'(YDEG); k++)
            if (k < int'(vlen[i]))
              acc = cnp_acc(acc, sat_msg(add_app(app_t'(py[vlist[i][k]]), app_t'(cU[vlist[i][k]]))), idx_t'(k+2));
          bx[i] <= cnp_out(acc, vb, idx_t'(1), ALPHA_SHIFT);
          for (int k = 0; k < int'(YDEG); k++)
            if (k < int'(vlen[i]))
              cV[vlist[i][k]] <= cnp_out(acc,
                  sat_msg(add_app(app_t'(py[vlist[i][k]]), app_t'(cU[vlist[i][k]]))),
                  idx_t'(k+2), ALPHA_SHIFT);
        end
      end
    end
  end

  // configuration writes
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      case (cfg_sel)
        CFG_U_ROW: begin
          ulen[cfg_addr] <= deg_t'(cfg_len);
          for (int k = 0; k < int'(YDEG); k++) ulist[cfg_addr][k] <= cfg_data[k];
        end
        CFG_V_ROW: begin
          vlen[cfg_addr] <= deg_t'(cfg_len);
          for (int k = 0; k < int'(YDEG); k++) vlist[cfg_addr][k] <= cfg_data[k];
        end
        CFG_PRIOR_Z:
          for (int k = 0; k < int'(W_MAX); k++)
            if (k < int'(cfg_len) && int'(cfg_addr) + k < int'(NZ)) pz[int'(cfg_addr) + k] <= msg_t'(cfg_data[k]);
        CFG_PRIOR_X:
          for (int k = 0; k < int'(W_MAX); k++)
            if (k < int'(cfg_len) && int'(cfg_addr) + k < int'(NX)) px[int'(cfg_addr) + k] <= msg_t'(cfg_data[k]);
        CFG_PRIOR_Y:
          for (int k = 0; k < int'(W_MAX); k++)
            if (k < int'(cfg_len) && int'(cfg_addr) + k < int'(NY)) py[int'(cfg_addr) + k] <= msg_t'(cfg_data[k]);
        default: ;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> st == B_IDLE)
    else $error("bottom_unit: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n)
                   cfg_we && (cfg_sel == CFG_U_ROW || cfg_sel == CFG_V_ROW) |-> int'(cfg_len) <= int'(YDEG))
    else $error("bottom_unit: row longer than YDEG");

  if (YDEG > W_MAX) begin : g_bad_ydeg
    $error("bottom_unit: YDEG must not exceed the configuration width W_MAX");
  end

endmodule
