// particle_population: number of particles of one sub-filter in each of the
// eight sectors.
//
// One counter per sector increments when a valid particle with that sector
// index passes. clr (synchronous, at the start of an iteration) sets all
// counters to zero. count[n] is the population of sector n+1; at most M.
// Timing: counts include a particle one cycle after its valid.
module particle_population #(
  parameter int unsigned M = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       valid,
  input  logic [2:0]                 sector,
  output logic [7:0][$clog2(M+1)-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      count <= '0;
    else if (clr)
      count <= '0;
    else if (valid)
      count[sector] <= count[sector] + 1'b1;
  end

endmodule
