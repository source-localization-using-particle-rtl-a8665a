// filter_bank: K sub-filters connected in a ring.
//
// Sub-filter k (0-based) receives the routed particles of sub-filter k-1 and
// sub-filter 0 those of sub-filter K-1, so in every iteration each sub-filter
// hands the first M/2 particles it reads to its successor. All sub-filters
// start together and run in lock step through sampling and importance; their
// resampling runs take data-dependent times, so done is raised once every
// sub-filter has finished. The ring follows the design description.
//
// Interface: prn holds 2K random words: prn[k] is PRN_x and prn[k+K] PRN_y of
// sub-filter k. x_out[k]/x_valid stream the sampled particles (all
// sub-filters in the same cycles). count[k] holds the sector populations of
// sub-filter k; it is final when done pulses and stays so until the next
// start. done pulses once per iteration, one cycle after the last sub-filter
// finished.
module filter_bank
  import pf_pkg::*;
#(
  parameter int unsigned K     = 8,
  parameter int unsigned M     = 32,
  parameter logic [15:0] STD   = 16'd256,
  parameter logic [15:0] ALPHA = 16'd52429,
  parameter logic [15:0] BETA  = 16'd39322,
  parameter int unsigned ITER  = 14
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic                                 sel_int,
  input  particle_t                            x_ugv,
  input  angle_t                               phi_ugv,
  input  logic [7:0]                           z,
  input  logic [2*K-1:0][15:0]                 prn,
  output logic                                 x_valid,
  output particle_t [K-1:0]                    x_out,
  output logic [K-1:0][7:0][$clog2(M+1)-1:0]   count,
  output logic                                 busy,
  output logic                                 done
);
  particle_t [K-1:0] route;
  logic      [K-1:0] xv, sf_busy, sf_done, fin;

  for (genvar k = 0; k < K; k++) begin : g_sf
    sub_filter #(.M(M), .STD(STD), .ALPHA(ALPHA), .BETA(BETA), .ITER(ITER)) u_sf (
      .clk, .rst_n,
      .start, .sel_int, .x_ugv, .phi_ugv, .z,
      .prn_x(prn[k]),
      .prn_y(prn[k+K]),
      .route_in(route[(k + K - 1) % K]),
      .route_out(route[k]),
      .x_out_valid(xv[k]),
      .x_out(x_out[k]),
      .count(count[k]),
      .busy(sf_busy[k]),
      .done(sf_done[k])
    );
  end

  assign x_valid = xv[0];
  assign busy    = |sf_busy || |fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start)
        fin <= '0;
      else if (&(fin | sf_done)) begin
        fin  <= '0;
        done <= 1'b1;
      end else
        fin <= fin | sf_done;
    end
  end

endmodule
