// particle_memory: dual-port particle store of one sub-filter.
//
// Holds the M particles (X,Y) of a sub-filter. The same memory keeps the
// sampled particles and, through the replicated/discarded index lists, the
// resampled ones, so a sub-filter needs one memory of depth M instead of two.
// One synchronous read port (address = Ind R) and one write port (write-back
// of the newly sampled particle) work in the same cycle, as a block RAM.
//
// Timing: rdata is valid one cycle after raddr. A read of the address being
// written in the same cycle returns the old contents.
module particle_memory
  import pf_pkg::*;
#(
  parameter int unsigned M = 32
) (
  input  logic                   clk,
  input  logic [$clog2(M)-1:0]   raddr,
  output particle_t              rdata,
  input  logic                   we,
  input  logic [$clog2(M)-1:0]   waddr,
  input  particle_t              wdata
);
  particle_t mem [M];

  always_ff @(posedge clk) begin
    if (we)
      mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
