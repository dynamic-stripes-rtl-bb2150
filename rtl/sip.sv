// sip: modified Serial Inner-Product unit.
//
// Each cycle the SIP receives one bit of each of its LANES activations (all
// at the same bit position) and holds LANES weights of WBITS bits. It ANDs
// every weight with its activation bit, optionally negates the products
// (`sign_bit`: the bit being sent is a two's-complement sign bit, weight
// -2^p), sums them in an adder tree, and shifts the sum left by sB, the
// offset of the bit position being processed. The shifted sum is added to
// the accumulator A. Because every bit arrives with its own position, the
// SIP can process any contiguous range of bit positions nH..nL, which is what
// the dynamic precision detection needs. This is the datapath of the source's
// "Modified SIP" figure: AND gates, neg blocks, adder tree, shifter sB,
// adder, accumulator A, a 1/0 mux in front of the adder fed by i_nbout, a max
// unit over o_nbout and i_nbout, an output mux and a final << prec.
//
// Own choices, where the figure shows no detail:
//  * The figure drives the neg gates and the 1/0 mux from one wire marked
//    MSB. Here they are two inputs: `sign_bit` (negate) and `load` (mux picks
//    i_nbout, starting a new sum from a partial sum read back from the output
//    buffer). With dynamic precision the first bit processed is nH, which is
//    not the sign bit, so the two events no longer coincide.
//  * The figure keeps a <<1 block on the accumulator feedback (bit-serial
//    Horner accumulation of the original design). With the sB shifter placing
//    every partial sum at its own bit position, the feedback is not shifted.
//  * `pool` selects the max unit's output at the output mux; `en` gates the
//    accumulator. Weights and i_nbout are signed; A is ACC_W bits wide.
//
// Timing: A updates at the clock edge after a cycle with en=1; o_nbout is A
// and `out` is combinational from A, i_nbout, pool and prec.
module sip #(
  parameter int unsigned LANES  = 16,
  parameter int unsigned WBITS  = 16,
  parameter int unsigned OFF_W  = 4,
  parameter int unsigned ACC_W  = 40,
  parameter int unsigned PREC_W = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic                         load,
  input  logic                         sign_bit,
  input  logic [LANES-1:0]             n_bits,
  input  logic [LANES-1:0][WBITS-1:0]  weights,
  input  logic [OFF_W-1:0]             sb,
  input  logic signed [ACC_W-1:0]      i_nbout,
  input  logic                         pool,
  input  logic [PREC_W-1:0]            prec,
  output logic signed [ACC_W-1:0]      o_nbout,
  output logic signed [ACC_W-1:0]      out
);

  logic signed [ACC_W-1:0] tree, shifted, base, a_q, pooled;

  // AND gates, neg blocks and adder tree
  always_comb begin
    tree = '0;
    for (int i = 0; i < LANES; i++) begin
      logic signed [ACC_W-1:0] term;
      term = n_bits[i] ? ACC_W'(signed'(weights[i])) : '0;
      if (sign_bit) term = -term;
      tree = tree + term;
    end
  end

  assign shifted = tree <<< sb;               // shifter, control sB
  assign base    = load ? i_nbout : a_q;      // 1/0 mux

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  a_q <= '0;
    else if (en) a_q <= base + shifted;       // adder and accumulator A
  end

  assign o_nbout = a_q;
  assign pooled  = (pool && (i_nbout > a_q)) ? i_nbout : a_q;  // max unit + mux
  assign out     = pooled <<< prec;

endmodule
