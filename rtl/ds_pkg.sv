// ds_pkg: sizes shared by the Dynamic Stripes blocks.
//
// The defaults are the configuration the design is built around: 16 tiles,
// each a 16x16 grid of serial inner-product units (SIPs); 256 activations of
// 16 bits broadcast to all tiles one bit per cycle, split into 16 subgroups of
// 16 activations that each carry their own (offset, EOG) precision wires.
// Every module takes these as overridable parameters; the package only holds
// the defaults and the small helpers that several modules share.
// The accumulator width (ACC_W) is this design's own choice: the source
// description gives none.
package ds_pkg;

  parameter int unsigned TILES = 16;  // tiles fed by the dispatcher
  parameter int unsigned ROWS  = 16;  // SIP rows per tile = filters per tile
  parameter int unsigned COLS  = 16;  // SIP columns per tile = activation subgroups
  parameter int unsigned LANES = 16;  // activations per subgroup = weights per SIP
  parameter int unsigned BITS  = 16;  // activation precision (baseline 16 bits)
  parameter int unsigned WBITS = 16;  // weight (synapse) precision
  parameter int unsigned ACC_W = 40;  // accumulator A width (own choice)

  // Width of a bit-position offset for a given activation width.
  function automatic int unsigned off_width(int unsigned bits);
    return (bits > 1) ? $clog2(bits) : 1;
  endfunction

endpackage
