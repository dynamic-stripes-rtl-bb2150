// dispatcher: bit-serial broadcast of activations with runtime precision.
//
// The dispatcher takes a group of COLS x LANES activations (256 = 16 subgroups
// of 16 by default) from the activation memory, finds the precision of each
// subgroup at runtime with a precision_detector, and then broadcasts the group
// to all tiles one bit position per cycle. Subgroup c goes to SIP column c of
// every tile, together with its own current offset (4 wires) and End-of-Group
// flag (1 wire), driven by an offset_counter that starts at nH and counts
// down to nL. This all follows the source description.
//
// The per-layer precision of the original design is kept: software gives a
// window [layer_nl, layer_nh] per layer and bits outside it are dropped
// before detection, so the runtime range always lies inside the layer's
// profiled range (the source evaluates the design this way: per-layer
// precision first, then runtime detection per subgroup). Dropping the bits
// above layer_nh, rather than saturating, is this design's choice.
//
// A subgroup that has reached nL waits, sending zero bits, until every
// subgroup of the group has finished; only then does the next group start
// (the source evaluates the design this way). A group thus takes
// max over c of (nH_c - nL_c + 1) cycles, with no bubble between groups.
//
// Interface (own choice): a valid/ready handshake on the input group. The
// source must hold in_valid and the data until in_ready. in_first marks a
// group that starts a new set of output sums (the SIPs then reload their
// accumulators), in_last the group that completes them. Outputs: per
// subgroup bits/offset/eog, plus bc_valid (a bit position is being sent),
// bc_load (first cycle of an in_first group) and bc_last (final cycle of an
// in_last group). All broadcast outputs are driven from registers.
module dispatcher #(
  parameter int unsigned COLS  = 16,
  parameter int unsigned LANES = 16,
  parameter int unsigned BITS  = 16,
  parameter int unsigned OFF_W = (BITS > 1) ? $clog2(BITS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // activation group from memory
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [COLS-1:0][LANES-1:0][BITS-1:0] in_act,
  input  logic                              in_first,
  input  logic                              in_last,
  // per-layer precision window set by software (Stripes-style)
  input  logic [OFF_W-1:0]                  layer_nh,
  input  logic [OFF_W-1:0]                  layer_nl,
  // broadcast to the tiles
  output logic [COLS-1:0][LANES-1:0]        bc_bits,
  output logic [COLS-1:0][OFF_W-1:0]        bc_offset,
  output logic [COLS-1:0]                   bc_eog,
  output logic                              bc_valid,
  output logic                              bc_load,
  output logic                              bc_last
);

  logic [COLS-1:0][LANES-1:0][BITS-1:0] act_q, act_win;
  logic [BITS-1:0] win_mask;
  logic [COLS-1:0][OFF_W-1:0] det_h, det_l;
  logic [COLS-1:0] det_nz, active, finishing;
  logic first_q, last_q, first_cycle_q;
  logic busy, group_done, accept;

  // bits outside the layer's window [layer_nl, layer_nh] are dropped
  always_comb begin
    for (int j = 0; j < BITS; j++)
      win_mask[j] = (OFF_W'(j) <= layer_nh) && (OFF_W'(j) >= layer_nl);
    for (int c = 0; c < COLS; c++)
      for (int l = 0; l < LANES; l++) act_win[c][l] = in_act[c][l] & win_mask;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_sub
    precision_detector #(.N(LANES), .BITS(BITS), .OFF_W(OFF_W)) u_det (
      .act    (act_win[c]),
      .or_bits(),
      .n_h    (det_h[c]),
      .n_l    (det_l[c]),
      .nonzero(det_nz[c])
    );

    offset_counter #(.OFF_W(OFF_W)) u_cnt (
      .clk   (clk),
      .rst_n (rst_n),
      .start (accept),
      .n_h   (det_h[c]),
      .n_l   (det_l[c]),
      .offset(bc_offset[c]),
      .eog   (bc_eog[c]),
      .active(active[c])
    );

    // a subgroup is finished when it is idle or in its eog cycle
    assign finishing[c] = !active[c] || bc_eog[c];

    always_comb begin
      for (int l = 0; l < LANES; l++)
        bc_bits[c][l] = active[c] & act_q[c][l][bc_offset[c]];
    end
  end

  assign busy       = |active;
  assign group_done = busy && (&finishing);
  assign in_ready   = !busy || group_done;
  assign accept     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q         <= '0;
      first_q       <= 1'b0;
      last_q        <= 1'b0;
      first_cycle_q <= 1'b0;
    end else begin
      first_cycle_q <= accept;
      if (accept) begin
        act_q   <= act_win;
        first_q <= in_first;
        last_q  <= in_last;
      end
    end
  end

  assign bc_valid = busy;
  assign bc_load  = busy && first_cycle_q && first_q;
  assign bc_last  = group_done && last_q;

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> layer_nh >= layer_nl);

  // the group source must hold its data while it waits
  assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_act) && $stable(in_first) && $stable(in_last));


endmodule
