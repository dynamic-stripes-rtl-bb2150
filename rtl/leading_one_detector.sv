// leading_one_detector: one-hot mark of the highest set bit of a vector.
//
// This is the nH detection block. It takes the per-bit-position OR signals of
// an activation group (ORj) and returns a one-hot vector with a 1 at the
// most significant position j where ORj is 1. When no bit is set the output
// is all zero and `any` is low. The block is purely combinational.
//
// The function (a leading "bit that is 1" detector) comes from the source
// description; its inside is this design's own: each bit is kept when no
// higher bit is set, which a synthesis tool maps onto a prefix-OR chain.
module leading_one_detector #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] in,
  output logic [W-1:0] onehot,
  output logic         any
);

  // higher[j] = OR of in[W-1:j+1]
  logic [W-1:0] higher;

  always_comb begin
    higher[W-1] = 1'b0;
    for (int j = W - 2; j >= 0; j--) higher[j] = higher[j+1] | in[j+1];
    onehot = in & ~higher;
    any    = |in;
  end

endmodule
