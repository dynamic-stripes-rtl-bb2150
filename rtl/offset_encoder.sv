// offset_encoder: one-hot to binary encoder (Encoder A / Encoder B).
//
// Turns the one-hot output of a leading- or trailing-one detector into the
// binary bit position that is sent to the tiles as an offset: 3 bits for 8-bit
// activations, 4 bits for the 16-bit baseline. An all-zero input encodes as
// 0. Each output bit is the OR of the one-hot inputs whose index has that bit
// set, the plain OR-encoder; that structure is this design's choice, the
// source only gives the function. Purely combinational.
module offset_encoder #(
  parameter int unsigned W     = 16,
  parameter int unsigned OFF_W = (W > 1) ? $clog2(W) : 1
) (
  input  logic [W-1:0]     onehot,
  output logic [OFF_W-1:0] offset
);

  always_comb begin
    offset = '0;
    for (int j = 0; j < W; j++) begin
      for (int b = 0; b < OFF_W; b++) begin
        if (((j >> b) & 1) != 0) offset[b] = offset[b] | onehot[j];
      end
    end
  end

endmodule
