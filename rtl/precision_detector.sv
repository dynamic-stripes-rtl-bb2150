// precision_detector: runtime precision (nH, nL) of one group of activations.
//
// For a group of N activations of BITS bits each (all taken as non-negative,
// as the source assumes), it forms ORj, the OR of bit j over the whole group,
// with a cascade of two-input ORs per bit position running across the
// activations. A leading-one detector over ORj gives nH, the highest bit
// position holding a 1 anywhere in the group; a trailing-one detector gives
// nL, the lowest. Two encoders (A for nH, B for nL) turn the one-hot results
// into binary offsets. This structure follows the source's example figure.
// `nonzero` is low when every activation is zero; nH and nL are then 0 (this
// design's choice, so that an all-zero group takes a single cycle).
// Purely combinational; the dispatcher registers the results.
module precision_detector #(
  parameter int unsigned N     = 16,
  parameter int unsigned BITS  = 16,
  parameter int unsigned OFF_W = (BITS > 1) ? $clog2(BITS) : 1
) (
  input  logic [N-1:0][BITS-1:0] act,
  output logic [BITS-1:0]        or_bits,
  output logic [OFF_W-1:0]       n_h,
  output logic [OFF_W-1:0]       n_l,
  output logic                   nonzero
);

  // chain[i][j] = OR of bit j of act[0..i]: the cascaded OR gates
  logic [N-1:0][BITS-1:0] chain;
  logic [BITS-1:0] hi_onehot, lo_onehot;
  logic hi_any, lo_any;

  assign chain[0] = act[0];
  for (genvar i = 1; i < N; i++) begin : g_or
    assign chain[i] = chain[i-1] | act[i];
  end
  assign or_bits = chain[N-1];

  leading_one_detector #(.W(BITS)) u_lead (
    .in(or_bits), .onehot(hi_onehot), .any(hi_any)
  );

  trailing_one_detector #(.W(BITS)) u_trail (
    .in(or_bits), .onehot(lo_onehot), .any(lo_any)
  );

  offset_encoder #(.W(BITS), .OFF_W(OFF_W)) u_enc_a (
    .onehot(hi_onehot), .offset(n_h)
  );

  offset_encoder #(.W(BITS), .OFF_W(OFF_W)) u_enc_b (
    .onehot(lo_onehot), .offset(n_l)
  );

  assign nonzero = hi_any & lo_any;

endmodule
