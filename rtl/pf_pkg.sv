// pf_pkg: types and constants shared by the particle filter.
//
// Particle coordinates are signed 16-bit fixed point with 8 fraction bits
// (Q8.8, range -128..+128 position units); the 16-bit width follows the
// design description, the split into integer and fraction bits is this
// design's choice. Bearings are 12-bit unsigned angles where 4096 is one
// full turn (2*pi). Weights are unsigned Q0.16 numbers.
package pf_pkg;

  localparam int unsigned DW = 16;   // particle coordinate width
  localparam int unsigned AW = 12;   // bearing width
  localparam int unsigned WW = 16;   // weight width

  typedef logic signed [DW-1:0] coord_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
  } particle_t;

  typedef logic [AW-1:0] angle_t;
  typedef logic [WW-1:0] weight_t;

  // Saturate a wider signed sum back to a coordinate.
  function automatic coord_t sat_coord(input logic signed [DW+1:0] v);
    if (v > $signed({3'b000, {(DW-1){1'b1}}}))
      return coord_t'({1'b0, {(DW-1){1'b1}}});
    else if (v < $signed({3'b111, {(DW-1){1'b0}}}))
      return coord_t'({1'b1, {(DW-1){1'b0}}});
    else
      return coord_t'(v[DW-1:0]);
  endfunction

endpackage
