// serial_unit: pipelined serial (horizontal) normalized min-sum decoder for one of the
// two top blocks of the GARI matrix, D_X (columns e_bar_Z) or D_Z (columns e_bar_X).
//
// One check (row) enters the pipeline per clock, in the random order given by a
// row_shuffler, so a pass over all M rows takes M clocks plus the pipeline depth.
// For every column i the unit keeps S[i], the sum of the check-to-variable messages
// that its D rows currently send to i. The bottom-part unit supplies b_in[i], the
// message its own row sends to the same column, so the posterior is b_in[i] + S[i]
// and S[i] itself is the extrinsic message handed back to the bottom-part unit.
//
// Pipeline (PIPE clocks from issue to write-back):
//   1  issue: the row number is read from the shuffler's active order
//   2  read: row weight, column indices, old messages of the row (zero on the first
//      visit of a decode), S and b_in of its columns; v2c = b + S - old, saturated
//   3  check-node processor (nms_cnp) gives the new messages
//   4..PIPE-1  delay registers (the logic of a faster implementation is spread here)
//   PIPE  write-back: new messages stored, S[col] += new - old
// Rows that are still in flight are not waited for: a row may read an S value that
// lacks the update of up to PIPE-2 earlier rows. Because write-back adds the change
// (new - old) to the value S holds at that time, no update is ever lost. This is
// what lets one row enter per clock, which is the rate the paper's per-iteration
// delays imply (2.22 us at 357 MHz = 792 clocks for the 792 rows of D_X).
//
// Interface: `clear` (one clock, between decodes) forgets all messages; `cancel`
// stops issuing rows (the rows in flight are still written back, and no done is
// given; cancel wins over a start in the same clock); `start`
// begins one pass; `done` pulses for one clock M+PIPE+1 clocks after `start` (one
// clock to take the order, M issue clocks, PIPE-1 to the last write-back, one more).
// cfg_we writes one row of the structure: cfg_len column indices in cfg_cols.
// Follows the paper: serial horizontal schedule with randomized row order, one CNP,
// 10 pipeline stages, NMS. This design's choices: the S/b split of the posterior,
// the delta write-back, the stage assignment and the configuration port.
module serial_unit
  import gari_pkg::*;
#(
  parameter int unsigned M           = 792,
  parameter int unsigned N           = 7920,
  parameter int unsigned W_MAX       = 48,
  parameter int unsigned PIPE        = 10,
  parameter int unsigned ALPHA_SHIFT = 5
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // structure configuration
  input  logic                         cfg_we,
  input  logic [$clog2(M)-1:0]         cfg_row,
  input  logic [$clog2(W_MAX+1)-1:0]   cfg_len,
  input  idx_t                         cfg_cols [W_MAX],
  // decoding
  input  logic                         clear,
  input  logic [M-1:0]                 syn,
  input  logic                         start,
  input  logic                         cancel,
  output logic                         done,
  output logic                         busy,
  // row order from the row_shuffler
  output logic                         ord_swap,
  input  logic                         ord_ready,
  output logic [$clog2(M)-1:0]         ord_addr,
  input  logic [$clog2(M)-1:0]         ord_row,
  // messages exchanged with the bottom-part unit
  input  msg_t                         b_in  [N],
  output app_t                         s_out [N]
);

  localparam int unsigned RW = $clog2(M);
  localparam int unsigned LW = $clog2(W_MAX+1);
  localparam int unsigned QD = PIPE - 3;   // CNP register plus delay registers

  typedef logic [RW-1:0] row_t;
  typedef logic [LW-1:0] len_t;

  // structure and message memories
  len_t  len_mem [M];
  idx_t  col_mem [M][W_MAX];
  msg_t  c2v_mem [M][W_MAX];
  logic  visited [M];
  app_t  S       [N];

  assign s_out = S;

  // control
  typedef enum logic [1:0] {S_IDLE, S_WAIT_ORD, S_RUN, S_DRAIN} state_e;
  state_e st;
  row_t   cnt;
  logic   quiet;   // pass was aborted: drain without reporting done

  // stage 1
  logic  s1_vld;
  row_t  s1_row;
  // stage 2
  logic  s2_vld;
  row_t  s2_row;
  len_t  s2_len;
  logic  s2_syn;
  idx_t  s2_cols [W_MAX];
  msg_t  s2_old  [W_MAX];
  msg_t  s2_v2c  [W_MAX];
  // stages 3 .. PIPE-1
  logic  q_vld  [QD];
  row_t  q_row  [QD];
  len_t  q_len  [QD];
  idx_t  q_cols [QD][W_MAX];
  msg_t  q_old  [QD][W_MAX];
  msg_t  q_new  [QD][W_MAX];

  msg_t  cnp_c2v [W_MAX];

  nms_cnp #(.W(W_MAX), .ALPHA_SHIFT(ALPHA_SHIFT)) u_cnp (
    .v2c(s2_v2c), .len(s2_len), .syn(s2_syn), .c2v(cnp_c2v)
  );

  assign ord_addr = cnt;
  assign ord_swap = (st == S_WAIT_ORD) && ord_ready && !cancel;
  assign busy     = (st != S_IDLE);

  logic pipe_empty;
  always_comb begin
    pipe_empty = !s1_vld && !s2_vld;
    for (int i = 0; i < int'(QD); i++) pipe_empty = pipe_empty && !q_vld[i];
  end

  // control and pipeline registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      cnt    <= '0;
      quiet  <= 1'b0;
      done   <= 1'b0;
      s1_vld <= 1'b0;
      s1_row <= '0;
      s2_vld <= 1'b0;
      for (int i = 0; i < int'(QD); i++) q_vld[i] <= 1'b0;
    end else begin
      done <= 1'b0;
      // issue
      s1_vld <= 1'b0;
      if (cancel) begin
        // stop issuing rows; rows in flight are still written back
        if (st != S_IDLE) begin
          st    <= S_DRAIN;
          quiet <= 1'b1;
        end
      end else begin
        case (st)
          S_IDLE:     if (start) begin st <= S_WAIT_ORD; quiet <= 1'b0; end
          S_WAIT_ORD: if (ord_ready) begin st <= S_RUN; cnt <= '0; end
          S_RUN: begin
            s1_vld <= 1'b1;
            s1_row <= ord_row;
            if (cnt == row_t'(M-1)) st <= S_DRAIN;
            else                    cnt <= cnt + 1'b1;
          end
          S_DRAIN: if (pipe_empty) begin st <= S_IDLE; done <= !quiet; end
          default: st <= S_IDLE;
        endcase
      end
      // stage 2: read the row
      s2_vld <= s1_vld;
      if (s1_vld) begin
        s2_row <= s1_row;
        s2_len <= len_mem[s1_row];
        s2_syn <= syn[s1_row];
        for (int k = 0; k < int'(W_MAX); k++) begin
          idx_t c;
          msg_t o;
          c = col_mem[s1_row][k];
          o = visited[s1_row] ? c2v_mem[s1_row][k] : '0;
          s2_cols[k] <= c;
          s2_old[k]  <= o;
          if (k < int'(len_mem[s1_row]))
            s2_v2c[k] <= sat_msg(add_app(add_app(app_t'(b_in[c]), S[c]), -app_t'(o)));
          else
            s2_v2c[k] <= '0;
        end
      end
      // stage 3: check-node processor output, then the delay registers
      q_vld[0] <= s2_vld;
      if (s2_vld) begin
        q_row[0]  <= s2_row;
        q_len[0]  <= s2_len;
        q_cols[0] <= s2_cols;
        q_old[0]  <= s2_old;
        q_new[0]  <= cnp_c2v;
      end
      for (int i = 1; i < int'(QD); i++) begin
        q_vld[i] <= q_vld[i-1];
        if (q_vld[i-1]) begin
          q_row[i]  <= q_row[i-1];
          q_len[i]  <= q_len[i-1];
          q_cols[i] <= q_cols[i-1];
          q_old[i]  <= q_old[i-1];
          q_new[i]  <= q_new[i-1];
        end
      end
    end
  end

  // memories: configuration, write-back, clear
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      len_mem[cfg_row] <= cfg_len;
      col_mem[cfg_row] <= cfg_cols;
    end
    if (clear) begin
      for (int r = 0; r < int'(M); r++) visited[r] <= 1'b0;
      for (int i = 0; i < int'(N); i++) S[i] <= '0;
    end else if (q_vld[QD-1]) begin
      visited[q_row[QD-1]] <= 1'b1;
      c2v_mem[q_row[QD-1]] <= q_new[QD-1];
      for (int k = 0; k < int'(W_MAX); k++) begin
        if (k < int'(q_len[QD-1])) begin
          idx_t c;
          c = q_cols[QD-1][k];
          S[c] <= add_app(S[c], app_t'(q_new[QD-1][k]) - app_t'(q_old[QD-1][k]));
        end
      end
    end
  end

  // A pass may only start from idle, and clear may not hit a running pass.
  assert property (@(posedge clk) disable iff (!rst_n) start && !cancel |-> st == S_IDLE)
    else $error("serial_unit: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) clear |-> st == S_IDLE && pipe_empty)
    else $error("serial_unit: clear while busy");

endmodule
