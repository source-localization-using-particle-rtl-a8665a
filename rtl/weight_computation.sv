// weight_computation: likelihood of the eight binary photodiode readings for
// a particle in a given sector.
//
// For photodiode j the factor is alpha (reading 1) or 1-alpha (reading 0)
// when the particle lies in sector j, and alpha*beta or 1-alpha*beta when it
// does not; the weight is the product of the eight factors. alpha is the
// detection probability and beta the clutter probability. The per-photodiode
// likelihoods follow the design description; multiplying the eight of them
// (independent sensors), the Q0.16 number format and the truncation after
// each multiply are this design's choices. A factor of exactly 1.0 is held as
// 0xFFFF.
//
// Timing: a three-level multiplier tree with a register after each level;
// latency 3 cycles, one particle per cycle. tag travels alongside.
module weight_computation
  import pf_pkg::*;
#(
  parameter logic [15:0] ALPHA = 16'd52429,   // 0.8
  parameter logic [15:0] BETA  = 16'd39322,   // 0.6
  parameter int unsigned TW    = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [2:0]    sector,
  input  logic [7:0]    z,
  input  logic [TW-1:0] tag_in,
  output logic          out_valid,
  output weight_t       weight,
  output logic [TW-1:0] tag_out
);
  localparam logic [31:0] AB_P  = 32'(ALPHA) * 32'(BETA);
  localparam logic [15:0] F_A   = ALPHA;
  localparam logic [15:0] F_NA  = 16'hFFFF - ALPHA;
  localparam logic [15:0] F_AB  = AB_P[31:16];
  localparam logic [15:0] F_NAB = 16'hFFFF - AB_P[31:16];

  function automatic logic [15:0] qmul(input logic [15:0] a, input logic [15:0] b);
    logic [31:0] p;
    p = 32'(a) * 32'(b);
    return p[31:16];
  endfunction

  logic [15:0] f  [8];
  logic [15:0] l1 [4];
  logic [15:0] l2 [2];
  logic [2:0]       v;
  logic [TW-1:0]    t [3];

  always_comb begin
    for (int j = 0; j < 8; j++) begin
      if (3'(j) == sector) f[j] = z[j] ? F_A  : F_NA;
      else                 f[j] = z[j] ? F_AB : F_NAB;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v      <= '0;
      l1     <= '{default: '0};
      l2     <= '{default: '0};
      weight <= '0;
      t      <= '{default: '0};
    end else begin
      v    <= {v[1:0], in_valid};
      t[0] <= tag_in;
      t[1] <= t[0];
      t[2] <= t[1];
      for (int j = 0; j < 4; j++) l1[j] <= qmul(f[2*j], f[2*j+1]);
      for (int j = 0; j < 2; j++) l2[j] <= qmul(l1[2*j], l1[2*j+1]);
      weight <= qmul(l2[0], l2[1]);
    end
  end

  assign out_valid = v[2];
  assign tag_out   = t[2];

endmodule
