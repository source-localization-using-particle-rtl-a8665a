// index_memory: replicated or discarded index list of one sub-filter.
//
// M entries of log2(M) bits. The resampler writes one index per cycle at most;
// the sampling unit reads it back with an asynchronous (LUT RAM) read so that
// a replicated-index comparison and the discarded index it selects are
// available in the same cycle.
//
// Timing: synchronous write, combinational read.
module index_memory #(
  parameter int unsigned M = 32
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(M)-1:0] waddr,
  input  logic [$clog2(M)-1:0] wdata,
  input  logic [$clog2(M)-1:0] raddr,
  output logic [$clog2(M)-1:0] rdata
);
  logic [$clog2(M)-1:0] mem [M];

  always_ff @(posedge clk)
    if (we)
      mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule
