// pf_top: parallel particle filter for bearing-only source localisation.
//
// The filter estimates the position of a light source from the eight binary
// photodiode readings of a vehicle, its position and its bearing. N = K*M
// particles are split over K sub-filters that run sampling, importance and
// resampling in parallel and exchange half of their particles around a ring in
// every iteration. A parallel-output LFSR feeds every sub-filter with random
// numbers, the mean estimation block averages all particles into the position
// estimate pos, and the sector check block reports the sector around the
// vehicle that holds most particles (ind_theta), which the vehicle steers to.
// The block structure follows the design description; the handshake is this
// design's choice.
//
// Interface: seed_load loads the LFSR seed. A start pulse begins one
// iteration with z (bit j-1 = photodiode j), phi_ugv (4096 = one turn) and
// x_ugv (signed Q8.8) held until done. The first iteration after reset, or
// any iteration started with init high, places the particles around x_ugv
// instead of using the resampled ones. pos_valid pulses when pos is updated
// (during the iteration, after the sampling phase); done pulses at the end of
// the iteration, and ind_valid with ind_theta one cycle later.
//
// Timing: at most about 4M + ITER + 16 cycles per iteration, 158 at the
// defaults (156 measured). The design description gives 4N/K + tau = 178
// cycles for the same size.
module pf_top
  import pf_pkg::*;
#(
  parameter int unsigned K     = 8,
  parameter int unsigned M     = 32,
  parameter logic [15:0] STD   = 16'd256,
  parameter logic [15:0] ALPHA = 16'd52429,
  parameter logic [15:0] BETA  = 16'd39322,
  parameter int unsigned ITER  = 14
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          seed_load,
  input  logic [15:0]                   seed,
  input  logic                          start,
  input  logic                          init,
  input  logic [7:0]                    z,
  input  angle_t                        phi_ugv,
  input  particle_t                     x_ugv,
  output particle_t                     pos,
  output logic                          pos_valid,
  output logic [2:0]                    ind_theta,
  output logic [7:0][$clog2(K*M+1)-1:0] sector_total,
  output logic                          ind_valid,
  output logic                          busy,
  output logic                          done
);
  logic [2*K-1:0][15:0]               prn;
  logic                               x_valid, bank_busy, first_q, go;
  particle_t [K-1:0]                  x_out;
  logic [K-1:0][7:0][$clog2(M+1)-1:0] count;

  assign go   = start && !bank_busy;
  assign busy = bank_busy;

  // Sel Int is low only in the first iteration.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      first_q <= 1'b1;
    else if (go)
      first_q <= 1'b0;
  end

  lfsr_prng #(.K(K), .L(16)) u_rng (
    .clk, .rst_n, .seed_load, .seed, .prn
  );

  filter_bank #(.K(K), .M(M), .STD(STD), .ALPHA(ALPHA), .BETA(BETA), .ITER(ITER)) u_bank (
    .clk, .rst_n,
    .start(go),
    .sel_int(!(first_q || init)),
    .x_ugv, .phi_ugv, .z, .prn,
    .x_valid, .x_out, .count,
    .busy(bank_busy), .done
  );

  mean_estimation #(.K(K), .M(M)) u_mean (
    .clk, .rst_n, .clr(go), .valid(x_valid), .x_in(x_out),
    .pos, .pos_valid
  );

  sector_check #(.K(K), .M(M)) u_sect (
    .clk, .rst_n, .in_valid(done), .count,
    .ind_theta, .total(sector_total), .out_valid(ind_valid)
  );

endmodule
