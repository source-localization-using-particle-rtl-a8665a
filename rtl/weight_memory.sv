// weight_memory: single-port weight store of one sub-filter.
//
// During the importance step each weight is written at the address the
// sampling unit used for its particle (Addr w), so weights and particles share
// one order. During resampling the same port is read sequentially.
//
// Timing: synchronous write when we is high; rdata is the word at addr of the
// previous cycle (one-cycle read latency, block RAM style).
module weight_memory
  import pf_pkg::*;
#(
  parameter int unsigned M = 32
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(M)-1:0] addr,
  input  weight_t              wdata,
  output weight_t              rdata
);
  weight_t mem [M];

  always_ff @(posedge clk) begin
    if (we)
      mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
