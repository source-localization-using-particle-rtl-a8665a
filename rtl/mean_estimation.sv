// mean_estimation: mean position of all N = K*M particles.
//
// The K sub-filters deliver one particle each per cycle; the block adds the K
// positions and accumulates them over the M cycles of the sampling phase,
// then divides by N with an arithmetic right shift by log2(N) (K and M must
// be powers of two). The result is the source position estimate pos. This is
// the design description's method; the widths and the clear-on-first
// handshake are this design's.
//
// Interface: clr (pulse) clears the accumulator before an iteration; while
// valid is high x_in[k] is accumulated. pos_valid pulses the cycle after the
// M-th valid cycle, with pos holding the mean until the next result.
module mean_estimation
  import pf_pkg::*;
#(
  parameter int unsigned K = 8,
  parameter int unsigned M = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              valid,
  input  particle_t [K-1:0] x_in,
  output particle_t         pos,
  output logic              pos_valid
);
  localparam int unsigned LOGN = $clog2(K * M);
  localparam int unsigned AW_  = DW + LOGN;

  logic signed [AW_-1:0] acc_x, acc_y, sum_x, sum_y, nx, ny;
  logic [$clog2(M+1)-1:0] n;

  always_comb begin
    sum_x = '0;
    sum_y = '0;
    for (int k = 0; k < K; k++) begin
      sum_x += AW_'(x_in[k].x);
      sum_y += AW_'(x_in[k].y);
    end
    nx = acc_x + sum_x;
    ny = acc_y + sum_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_x     <= '0;
      acc_y     <= '0;
      n         <= '0;
      pos       <= '0;
      pos_valid <= 1'b0;
    end else begin
      pos_valid <= 1'b0;
      if (clr) begin
        acc_x <= '0;
        acc_y <= '0;
        n     <= '0;
      end else if (valid) begin
        acc_x <= nx;
        acc_y <= ny;
        n     <= n + 1'b1;
        if (n == ($clog2(M+1))'(M - 1)) begin
          pos.x     <= coord_t'(nx >>> LOGN);
          pos.y     <= coord_t'(ny >>> LOGN);
          pos_valid <= 1'b1;
          n         <= '0;
          acc_x     <= '0;
          acc_y     <= '0;
        end
      end
    end
  end

endmodule
