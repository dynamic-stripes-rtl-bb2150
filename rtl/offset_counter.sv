// offset_counter: current bit position and End-of-Group for one subgroup.
//
// Processing of an activation subgroup starts at bit nH and moves one bit
// position down per cycle. This counter holds the bit position being
// broadcast (`offset`) and a comparator raises `eog` in the cycle where that
// position equals nL, the last bit of the subgroup. Both follow the source
// description; the start/active handshake is this design's own.
//
// Timing: `start` (with n_h, n_l) loads the counter at a clock edge; from the
// next cycle `active` is high and `offset` = nH, nH-1, ..., nL, one value per
// cycle, with `eog` high in the nL cycle. The cycle after that `active` falls
// unless `start` was given again in the eog cycle (back-to-back groups), which
// always wins. A subgroup therefore takes nH - nL + 1 cycles.
module offset_counter #(
  parameter int unsigned OFF_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [OFF_W-1:0] n_h,
  input  logic [OFF_W-1:0] n_l,
  output logic [OFF_W-1:0] offset,
  output logic             eog,
  output logic             active
);

  logic [OFF_W-1:0] n_l_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      offset <= '0;
      n_l_q  <= '0;
      active <= 1'b0;
    end else if (start) begin
      offset <= n_h;
      n_l_q  <= n_l;
      active <= 1'b1;
    end else if (active) begin
      if (offset == n_l_q) active <= 1'b0;
      else                 offset <= offset - 1'b1;
    end
  end

  assign eog = active && (offset == n_l_q);

  // nH below nL cannot come from a precision detector.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> n_h >= n_l);

endmodule
