// row_shuffler: random check order for the randomized serial schedule.
//
// The D_X and D_Z units visit their checks one per clock in an order that is drawn
// afresh for every iteration. This block keeps two permutation buffers of M row
// numbers. The active buffer is read by the serial unit through rd_addr/rd_row
// (combinational read). Meanwhile the standby buffer is shuffled in place by the
// Fisher-Yates algorithm, one swap per clock (M-1 clocks): for k = M-1 down to 1,
// j = floor(r * (k+1) / 2^16) with r the low 16 bits of a xorshift32 generator, and
// entries k and j are exchanged. Shuffling a permutation that is already random keeps
// it uniformly random, so the standby buffer is never reset.
//
// Handshake: ready is high when the standby buffer is fully shuffled. A one-clock
// `swap` pulse while ready makes it the active buffer and starts shuffling the other
// one. A swap without ready is a protocol error (asserted). After reset both buffers
// hold the identity and the first shuffle starts at once.
//
// The seed is sampled while rst_n is low; every ensemble member gets its own seed.
// The paper asks for a fresh random order per iteration and distinct seeds per
// member; the double buffer, the Fisher-Yates method and the generator are this
// design's choices.
module row_shuffler #(
  parameter int unsigned M = 936
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [31:0]           seed,
  input  logic                  swap,
  output logic                  ready,
  input  logic [$clog2(M)-1:0]  rd_addr,
  output logic [$clog2(M)-1:0]  rd_row
);

  localparam int unsigned AW = $clog2(M);
  typedef logic [AW-1:0] row_t;

  row_t        perm [2][M];
  logic        act;            // index of the active buffer
  logic [31:0] rng;
  row_t        k;              // Fisher-Yates position, counts down to 1
  logic        busy;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  assign ready  = !busy;
  assign rd_row = perm[act][rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < int'(M); i++) perm[b][i] <= row_t'(i);
      act  <= 1'b0;
      rng  <= (seed == 32'd0) ? 32'h9E37_79B9 : seed;
      k    <= row_t'(M-1);
      busy <= (M > 1);
    end else begin
      if (busy) begin
        logic [AW+16:0] prod;
        row_t           j;
        row_t           pk;
        prod = {1'b0, rng[15:0]} * (AW+17)'(k + 1'b1);
        j    = row_t'(prod >> 16);
        pk   = perm[!act][k];
        perm[!act][k] <= perm[!act][j];
        perm[!act][j] <= pk;
        rng  <= xorshift32(rng);
        if (k == row_t'(1)) busy <= 1'b0;
        else                k    <= k - 1'b1;
      end else if (swap) begin
        act  <= !act;
        k    <= row_t'(M-1);
        busy <= (M > 1);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) swap |-> ready)
    else $error("row_shuffler: swap requested before the next order was ready");

endmodule
