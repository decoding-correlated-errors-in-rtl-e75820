// nms_cnp: normalized min-sum check-node processor for one check of weight up to W.
//
// It takes the variable-to-check messages of one row of the decoding matrix (the
// first len of the W inputs are valid) and the row's syndrome bit, and returns the
// check-to-variable message for every input: sign = XOR of the other inputs' signs
// and the syndrome bit, magnitude = alpha * (smallest magnitude among the other
// inputs), with alpha = 1 - 2^-ALPHA_SHIFT. The smallest two magnitudes and the
// position of the smallest are found in one scan, as usual for min-sum hardware.
// Purely combinational; the serial D_X/D_Z units register its inputs and outputs.
// Normalized min-sum and both alpha values follow the paper; the min1/min2 form is
// the standard way to compute it and is this design's choice.
module nms_cnp
  import gari_pkg::*;
#(
  parameter int unsigned W           = 48,
  parameter int unsigned ALPHA_SHIFT = 5
) (
  input  msg_t                     v2c [W],
  input  logic [$clog2(W+1)-1:0]   len,
  input  logic                     syn,
  output msg_t                     c2v [W]
);

  cnp_acc_t acc;

  always_comb begin
    acc = cnp_init(syn);
    for (int k = 0; k < W; k++) begin
      if (k < int'(len)) acc = cnp_acc(acc, v2c[k], idx_t'(k));
    end
    for (int k = 0; k < W; k++) begin
      c2v[k] = (k < int'(len)) ? cnp_out(acc, v2c[k], idx_t'(k), ALPHA_SHIFT) : '0;
    end
  end

endmodule
