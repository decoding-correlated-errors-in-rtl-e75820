// gari_pkg: types, constants and arithmetic shared by the GARI-NMS decoder.
//
// Messages are 12-bit two's-complement log-likelihood ratios, LLR = log(P(0)/P(1)),
// so a negative value means "error present". Magnitudes saturate symmetrically at
// +/-MSG_MAX. Running sums of check-to-variable messages are kept in APP_W bits and
// saturated to 12 bits whenever they cross from one processing unit to another.
// The 12-bit message width is the paper's; APP_W, the saturation rule and the
// configuration-table encoding are this design's own choices.
//
// The check-node arithmetic is normalized min-sum with alpha = 1 - 2^-ALPHA_SHIFT,
// computed as |m| - (|m| >> ALPHA_SHIFT): one shift and one subtractor. ALPHA_SHIFT=5
// gives 0.96875 and ALPHA_SHIFT=7 gives 0.9921875, the two factors used in the paper.
package gari_pkg;

  localparam int unsigned MSG_W = 12;
  localparam int unsigned APP_W = 16;
  localparam int unsigned IDX_W = 16;   // column index width (51048 Y columns < 2^16)

  typedef logic signed [MSG_W-1:0] msg_t;
  typedef logic signed [APP_W-1:0] app_t;
  typedef logic [IDX_W-1:0]        idx_t;
  typedef logic [MSG_W-2:0]        mag_t;

  localparam msg_t MSG_MAX = msg_t'((1 << (MSG_W-1)) - 1);

  // Which configuration table a cfg write goes to. Row tables take a whole row per
  // write (cfg_len entries of cfg_data); prior tables take cfg_len consecutive entries
  // starting at cfg_addr.
  typedef enum logic [2:0] {
    CFG_DX_ROW  = 3'd0,  // D_X row: column (e_bar_Z) indices
    CFG_DZ_ROW  = 3'd1,  // D_Z row: column (e_bar_X) indices
    CFG_U_ROW   = 3'd2,  // U row i: indices of the e_Y columns j with U[i][j]=1
    CFG_V_ROW   = 3'd3,  // V row i: indices of the e_Y columns j with V[i][j]=1
    CFG_PRIOR_Z = 3'd4,  // prior LLRs of e_Z
    CFG_PRIOR_X = 3'd5,  // prior LLRs of e_X
    CFG_PRIOR_Y = 3'd6,  // prior LLRs of e_Y
    CFG_WT_XBAR = 3'd7   // prior LLRs of e_bar_X (Z-only error model), for selection
  } cfg_sel_e;

  // Running state of a min-sum check node while its inputs are scanned.
  typedef struct packed {
    mag_t min1;
    mag_t min2;
    idx_t idx1;   // position of min1 within the row
    logic sgn;    // XOR of all input signs
  } cnp_acc_t;

  function automatic msg_t sat_msg(input app_t x);
    if (x > app_t'(MSG_MAX))       return MSG_MAX;
    else if (x < -app_t'(MSG_MAX)) return -MSG_MAX;
    else                           return msg_t'(x);
  endfunction

  function automatic app_t sat_app(input logic signed [APP_W:0] x);
    localparam logic signed [APP_W:0] AMAX = (1 <<< (APP_W-1)) - 1;
    if (x > AMAX)       return app_t'(AMAX);
    else if (x < -AMAX) return app_t'(-AMAX);
    else                return app_t'(x);
  endfunction

  function automatic app_t add_app(input app_t a, input app_t b);
    return sat_app({a[APP_W-1], a} + {b[APP_W-1], b});
  endfunction

  function automatic mag_t mag_of(input msg_t m);
    msg_t a;
    a = m[MSG_W-1] ? -m : m;
    return a[MSG_W-2:0];
  endfunction

  function automatic cnp_acc_t cnp_init(input logic syn);
    cnp_acc_t s;
    s.min1 = '1;
    s.min2 = '1;
    s.idx1 = '0;
    s.sgn  = syn;
    return s;
  endfunction

  // Fold input number k (value m) into the check-node state.
  function automatic cnp_acc_t cnp_acc(input cnp_acc_t s, input msg_t m, input idx_t k);
    cnp_acc_t r;
    mag_t     a;
    r = s;
    a = mag_of(m);
    r.sgn = s.sgn ^ m[MSG_W-1];
    if (a < s.min1) begin
      r.min2 = s.min1;
      r.min1 = a;
      r.idx1 = k;
    end else if (a < s.min2) begin
      r.min2 = a;
    end
    return r;
  endfunction

  // Outgoing message to input number k, whose incoming message was m.
  function automatic msg_t cnp_out(input cnp_acc_t s, input msg_t m, input idx_t k,
                                   input int unsigned alpha_shift);
    mag_t a;
    mag_t n;
    logic neg;
    a   = (k == s.idx1) ? s.min2 : s.min1;
    n   = a - (a >> alpha_shift);
    neg = s.sgn ^ m[MSG_W-1];
    return neg ? -msg_t'({1'b0, n}) : msg_t'({1'b0, n});
  endfunction

endpackage
