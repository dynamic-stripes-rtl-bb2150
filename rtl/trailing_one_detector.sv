// trailing_one_detector: one-hot mark of the lowest set bit of a vector.
//
// This is the nL detection block. As in the source description, it is the
// same block as the nH (leading-one) detector with the priority of its inputs
// reversed: the input is bit-reversed, passed through a leading_one_detector
// and the one-hot result is bit-reversed back. All zero in gives all zero
// out and `any` low. Purely combinational.
module trailing_one_detector #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] in,
  output logic [W-1:0] onehot,
  output logic         any
);

  logic [W-1:0] rev_in, rev_onehot;

  always_comb begin
    for (int j = 0; j < W; j++) rev_in[j] = in[W-1-j];
  end

  leading_one_detector #(.W(W)) u_lead (
    .in    (rev_in),
    .onehot(rev_onehot),
    .any   (any)
  );

  always_comb begin
    for (int j = 0; j < W; j++) onehot[j] = rev_onehot[W-1-j];
  end

endmodule
