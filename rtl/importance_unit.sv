// importance_unit: weights of the sampled particles of one sub-filter.
//
// For each sampled particle the angle computation block subtracts the vehicle
// position and takes the four-quadrant arctangent (cordic_atan2); the index
// generator turns the angle, relative to the vehicle bearing phi_ugv, into a
// sector index; the weight computation block turns sector index and the eight
// photodiode bits z into a weight. The weight is written into the weight
// memory at the particle's address (addr_w from the sampling unit), added to
// the running sum (the accumulator giving Sum w), and the sector index is
// counted by the particle population block (Count Ind theta).
//
// The weight memory has one port. Its address comes from addr_w while
// weights are written and from w_raddr (the resampler's counter) when rd_mode
// is high, as in the design description. The previous weight 1/M is a common
// factor of all weights and is left out. The pipeline registers are this
// design's choice.
//
// Timing: clr (pulse) clears sum, population and the weight count at the
// start of an iteration. A particle in at cycle c has its weight written at
// c + ITER + 6. done pulses one cycle after the M-th weight is written; sum_w
// and count are then final until the next clr.
module importance_unit
  import pf_pkg::*;
#(
  parameter int unsigned M     = 32,
  parameter logic [15:0] ALPHA = 16'd52429,
  parameter logic [15:0] BETA  = 16'd39322,
  parameter int unsigned ITER  = 14
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         in_valid,
  input  particle_t                    x_in,
  input  logic [$clog2(M)-1:0]         addr_w,
  input  particle_t                    x_ugv,
  input  angle_t                       phi_ugv,
  input  logic [7:0]                   z,
  input  logic                         rd_mode,
  input  logic [$clog2(M)-1:0]         w_raddr,
  output weight_t                      w_rdata,
  output logic [WW+$clog2(M)-1:0]      sum_w,
  output logic [7:0][$clog2(M+1)-1:0]  count,
  output logic                         done
);
  localparam int unsigned LOGM = $clog2(M);

  // Angle computation: subtractors.
  logic                  va;
  logic signed [DW:0]    dxa, dya;
  logic [LOGM-1:0]       aa;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va  <= 1'b0;
      dxa <= '0;
      dya <= '0;
      aa  <= '0;
    end else begin
      va  <= in_valid;
      dxa <= (DW+1)'(x_in.x) - (DW+1)'(x_ugv.x);
      dya <= (DW+1)'(x_in.y) - (DW+1)'(x_ugv.y);
      aa  <= addr_w;
    end
  end

  logic            vc;
  angle_t          theta;
  logic [LOGM-1:0] ac;

  cordic_atan2 #(.IN_W(DW+1), .ITER(ITER), .TW(LOGM)) u_cordic (
    .clk, .rst_n,
    .in_valid(va), .dx(dxa), .dy(dya), .tag_in(aa),
    .out_valid(vc), .theta, .tag_out(ac)
  );

  logic [2:0] sect_c;
  index_generator u_idx (.theta, .phi_ugv, .sector(sect_c));

  logic            vb;
  logic [2:0]      sect_b;
  logic [LOGM-1:0] ab;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vb     <= 1'b0;
      sect_b <= '0;
      ab     <= '0;
    end else begin
      vb     <= vc;
      sect_b <= sect_c;
      ab     <= ac;
    end
  end

  particle_population #(.M(M)) u_pop (
    .clk, .rst_n, .clr, .valid(vb), .sector(sect_b), .count
  );

  logic            vw;
  weight_t         w;
  logic [LOGM-1:0] aw;

  weight_computation #(.ALPHA(ALPHA), .BETA(BETA), .TW(LOGM)) u_wc (
    .clk, .rst_n,
    .in_valid(vb), .sector(sect_b), .z, .tag_in(ab),
    .out_valid(vw), .weight(w), .tag_out(aw)
  );

  weight_memory #(.M(M)) u_wmem (
    .clk,
    .we(vw && !rd_mode),
    .addr(rd_mode ? w_raddr : aw),
    .wdata(w),
    .rdata(w_rdata)
  );

  // Accumulator and completion count.
  logic [LOGM:0] nw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_w <= '0;
      nw    <= '0;
      done  <= 1'b0;
    end else if (clr) begin
      sum_w <= '0;
      nw    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (vw) begin
        sum_w <= sum_w + (WW+LOGM)'(w);
        nw    <= nw + 1'b1;
        if (nw == (LOGM+1)'(M - 1))
          done <= 1'b1;
      end
    end
  end

endmodule
