// dynamic_stripes: one dispatcher broadcasting to TILES tiles.
//
// The accelerator computes inner products bit-serially: activations travel
// one bit position per cycle, weights stay in the tiles, so the time a group
// of activations takes is its precision in bits. The dispatcher detects at
// runtime, per subgroup of LANES activations, the highest (nH) and lowest
// (nL) bit positions that hold a 1 and sends only nH..nL, each bit with its
// position (offset) and an End-of-Group flag. All tiles receive the same
// broadcast; column c of every tile takes subgroup c. Each tile holds its
// own ROWS filters' weights. This organisation (16 tiles of 16 x 16 SIPs,
// 256 activations in 16 subgroups with 5 extra wires each) is the source's.
//
// Interface (own choice):
//  * Input group: in_valid/in_ready, in_act (COLS x LANES activations,
//    non-negative, BITS bits), in_first (start new output sums from i_nbout)
//    and in_last (this group completes them). layer_nh / layer_nl give the
//    layer's profiled precision window, held for the whole layer. wt_in carries each tile's
//    ROWS x LANES weights for the same group and is sampled with it.
//  * i_nbout / o_nbout connect to an output buffer outside the design; out
//    is the pooled and prec-shifted result. out_valid pulses for one cycle
//    when the sums of an in_last group are complete in o_nbout / out.
//  * Activations are taken as non-negative (as the source assumes), so the
//    SIPs' sign-bit negation is held off.
// A group takes max over subgroups of (nH - nL + 1) cycles; out_valid comes
// one cycle after the final cycle of the in_last group.
module dynamic_stripes #(
  parameter int unsigned TILES  = ds_pkg::TILES,
  parameter int unsigned ROWS   = ds_pkg::ROWS,
  parameter int unsigned COLS   = ds_pkg::COLS,
  parameter int unsigned LANES  = ds_pkg::LANES,
  parameter int unsigned BITS   = ds_pkg::BITS,
  parameter int unsigned WBITS  = ds_pkg::WBITS,
  parameter int unsigned ACC_W  = ds_pkg::ACC_W,
  parameter int unsigned OFF_W  = ds_pkg::off_width(BITS),
  parameter int unsigned PREC_W = 4
) (
  input  logic                                              clk,
  input  logic                                              rst_n,
  input  logic                                              in_valid,
  output logic                                              in_ready,
  input  logic [COLS-1:0][LANES-1:0][BITS-1:0]              in_act,
  input  logic                                              in_first,
  input  logic                                              in_last,
  input  logic [OFF_W-1:0]                                  layer_nh,
  input  logic [OFF_W-1:0]                                  layer_nl,
  input  logic [TILES-1:0][ROWS-1:0][LANES-1:0][WBITS-1:0]  wt_in,
  input  logic [TILES-1:0][ROWS-1:0][COLS-1:0][ACC_W-1:0]   i_nbout,
  input  logic                                              pool,
  input  logic [PREC_W-1:0]                                 prec,
  output logic [TILES-1:0][ROWS-1:0][COLS-1:0][ACC_W-1:0]   o_nbout,
  output logic [TILES-1:0][ROWS-1:0][COLS-1:0][ACC_W-1:0]   out,
  output logic                                              out_valid
);

  logic [COLS-1:0][LANES-1:0] bc_bits;
  logic [COLS-1:0][OFF_W-1:0] bc_offset;
  logic [COLS-1:0]            bc_eog;
  logic bc_valid, bc_load, bc_last, accept;

  dispatcher #(.COLS(COLS), .LANES(LANES), .BITS(BITS), .OFF_W(OFF_W)) u_disp (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .in_act   (in_act),
    .in_first (in_first),
    .in_last  (in_last),
    .layer_nh (layer_nh),
    .layer_nl (layer_nl),
    .bc_bits  (bc_bits),
    .bc_offset(bc_offset),
    .bc_eog   (bc_eog),
    .bc_valid (bc_valid),
    .bc_load  (bc_load),
    .bc_last  (bc_last)
  );

  assign accept = in_valid && in_ready;

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    tile #(
      .ROWS(ROWS), .COLS(COLS), .LANES(LANES), .WBITS(WBITS),
      .OFF_W(OFF_W), .ACC_W(ACC_W), .PREC_W(PREC_W)
    ) u_tile (
      .clk      (clk),
      .rst_n    (rst_n),
      .wt_load  (accept),
      .wt_in    (wt_in[t]),
      .bc_bits  (bc_bits),
      .bc_offset(bc_offset),
      .bc_eog   (bc_eog),
      .bc_valid (bc_valid),
      .bc_load  (bc_load),
      .sign_bit (1'b0),
      .i_nbout  (i_nbout[t]),
      .pool     (pool),
      .prec     (prec),
      .o_nbout  (o_nbout[t]),
      .out      (out[t])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= bc_last;
  end

  // the end of an output set is signalled only in a broadcast cycle
  assert property (@(posedge clk) disable iff (!rst_n) bc_last |-> bc_valid);

endmodule
