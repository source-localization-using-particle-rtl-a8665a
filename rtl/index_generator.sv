// index_generator: sector index of a particle relative to the vehicle axis.
//
// The sector index is ceil(4/pi * (theta - phi_ugv)), i.e. which of the eight
// 45-degree sectors around the vehicle the particle lies in, counted from the
// vehicle's longitudinal axis. With 12-bit angles (4096 = one turn) the
// difference d = theta - phi wraps naturally and ceil(d / 512) - 1 equals
// floor((d - 1) / 512), so the 0-based sector is the top three bits of d - 1.
// d = 0 lands in the last sector, because 0 and 2*pi are the same direction
// (that corner case is this design's choice; the formula follows the design
// description).
//
// Combinational; sector is 0..7 for sectors 1..8.
module index_generator
  import pf_pkg::*;
(
  input  angle_t      theta,
  input  angle_t      phi_ugv,
  output logic [2:0]  sector
);
  angle_t d;

  always_comb begin
    d      = theta - phi_ugv - AW'(1);
    sector = d[AW-1 -: 3];
  end

endmodule
