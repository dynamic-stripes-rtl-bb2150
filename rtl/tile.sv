// tile: a ROWS x COLS grid of serial inner-product units (16 x 16 by default).
//
// Following the source: the SIPs along a row share the same LANES weights
// (one filter per row), and the SIPs along a column share the same LANES
// activation bits, which form one subgroup of the dispatcher's broadcast.
// Column c therefore takes subgroup c's bits and its offset as the shift
// control sB of every SIP in the column, so each column can run at its own
// runtime precision. A tile holds ROWS x LANES weights (256) and produces
// ROWS x COLS sums (16 filters x 16 activation subgroups).
//
// Own choices: the weights of a group are captured in a weight register
// when `wt_load` is high (the dispatcher's accept strobe), so the weight
// source may move to the next group while the tile still works on the
// current one. i_nbout, pool and prec are brought in per SIP / per tile from
// the output buffer and controller, which are outside this design.
//
// The End-of-Group wire of each column is used here: after the cycle in
// which column c sees its EOG, the SIPs of that column stop accumulating
// until the next group starts (wt_load), while the other columns finish.
//
// Timing: weights are registered at the edge where wt_load is high; the
// broadcast must start in the following cycle. Each SIP accumulates at
// every edge where bc_valid is high.
module tile #(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 16,
  parameter int unsigned LANES  = 16,
  parameter int unsigned WBITS  = 16,
  parameter int unsigned OFF_W  = 4,
  parameter int unsigned ACC_W  = 40,
  parameter int unsigned PREC_W = 4
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // weights for the next group
  input  logic                                  wt_load,
  input  logic [ROWS-1:0][LANES-1:0][WBITS-1:0] wt_in,
  // broadcast from the dispatcher
  input  logic [COLS-1:0][LANES-1:0]            bc_bits,
  input  logic [COLS-1:0][OFF_W-1:0]            bc_offset,
  input  logic [COLS-1:0]                       bc_eog,
  input  logic                                  bc_valid,
  input  logic                                  bc_load,
  input  logic                                  sign_bit,
  // output buffer side
  input  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  i_nbout,
  input  logic                                  pool,
  input  logic [PREC_W-1:0]                     prec,
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  o_nbout,
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  out
);

  logic [ROWS-1:0][LANES-1:0][WBITS-1:0] wt_q;
  logic [COLS-1:0] col_done_q;   // column has seen its EOG in this group
  logic [COLS-1:0] col_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       col_done_q <= '0;
    else if (wt_load) col_done_q <= '0;
    else if (bc_valid) col_done_q <= col_done_q | bc_eog;
  end

  assign col_en = {COLS{bc_valid}} & ~col_done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       wt_q <= '0;
    else if (wt_load) wt_q <= wt_in;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      sip #(
        .LANES(LANES), .WBITS(WBITS), .OFF_W(OFF_W),
        .ACC_W(ACC_W), .PREC_W(PREC_W)
      ) u_sip (
        .clk     (clk),
        .rst_n   (rst_n),
        .en      (col_en[c]),
        .load    (bc_load),
        .sign_bit(sign_bit),
        .n_bits  (bc_bits[c]),
        .weights (wt_q[r]),
        .sb      (bc_offset[c]),
        .i_nbout (i_nbout[r][c]),
        .pool    (pool),
        .prec    (prec),
        .o_nbout (o_nbout[r][c]),
        .out     (out[r][c])
      );
    end
  end

endmodule
