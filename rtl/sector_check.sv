// sector_check: sector with the largest particle population.
//
// Eight adders each sum one sector's particle count over the K sub-filters;
// a max computation block then picks the sector with the largest total. The
// vehicle steers towards that sector. Ties go to the lower sector number
// (this design's choice); the adders and the max search follow the design
// description.
//
// Interface: count[k][n] is the population of sector n+1 in sub-filter k,
// sampled when in_valid is high. One cycle later out_valid pulses with
// ind_theta (0..7 for sectors 1..8) and total[n], the summed populations.
module sector_check #(
  parameter int unsigned K = 8,
  parameter int unsigned M = 32
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic [K-1:0][7:0][$clog2(M+1)-1:0]     count,
  output logic [2:0]                             ind_theta,
  output logic [7:0][$clog2(K*M+1)-1:0]          total,
  output logic                                   out_valid
);
  localparam int unsigned TW = $clog2(K * M + 1);

  logic [7:0][TW-1:0] sum;
  logic [2:0]         best;

  always_comb begin
    for (int n = 0; n < 8; n++) begin
      sum[n] = '0;
      for (int k = 0; k < K; k++)
        sum[n] += TW'(count[k][n]);
    end
    best = '0;
    for (int n = 1; n < 8; n++)
      if (sum[n] > sum[best])
        best = 3'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ind_theta <= '0;
      total     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        ind_theta <= best;
        total     <= sum;
      end
    end
  end

endmodule
