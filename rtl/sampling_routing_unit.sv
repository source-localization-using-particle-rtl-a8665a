// sampling_routing_unit: sampling and particle routing of one sub-filter.
//
// For each of the M sampling cycles the replicated index Ind R (from the
// resampling unit) is the read address of the dual-port particle memory.
// Replicated indices arrive sorted, so a replica always follows its original:
// a comparator of Ind R with its delayed value raises Rep, and for a replica
// the particle is taken from a register (sub-block a) instead of the memory,
// whose location may already hold the newly sampled particle. The write
// address of the new particle is Ind R for the first copy and the next
// discarded index Ind D for each further copy, so no particle that is still
// to be read is overwritten. In the first iteration (sel_int = 0) the particles
// are instead generated around the vehicle position x0_ugv and written at the
// addresses of a counter.
//
// Routing (sub-block b): the particle read in each cycle is also sent to the
// next sub-filter (route_out). For the first M/2 cycles (Sel Route low) the
// sampling block takes the particle arriving from the previous sub-filter
// (route_in); for the last M/2 cycles it takes the local particle. The
// sampled particle is written back to the particle memory and sent to the
// importance unit with its address (Addr w).
//
// The datapath follows the design description. Forcing Rep low for the first
// particle of an iteration and the pipeline alignment are this design's
// choices.
//
// Timing: start (pulse) begins a phase of M cycles. Stage 0: Ind R / Ind D
// read, Rep, write address; stage 1: memory data, replica register, routing
// muxes (route_out valid here); stage 2: sampled particle, write-back,
// x_out / addr_w. x_out_valid is high for M cycles starting 3 cycles after
// start.
module sampling_routing_unit
  import pf_pkg::*;
#(
  parameter int unsigned M = 32,
  parameter logic [15:0] STD = 16'd256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 sel_int,
  input  particle_t            x0_ugv,
  input  logic [15:0]          prn_x,
  input  logic [15:0]          prn_y,
  input  logic [$clog2(M)-1:0] ind_r,
  input  logic [$clog2(M)-1:0] ind_d,
  output logic                 en_r,
  output logic                 en_d,
  output particle_t            route_out,
  output logic                 route_out_valid,
  input  particle_t            route_in,
  output logic                 x_out_valid,
  output particle_t            x_out,
  output logic [$clog2(M)-1:0] addr_w
);
  localparam int unsigned LOGM = $clog2(M);

  // stage 0
  logic            act0;
  logic [LOGM-1:0] cnt0;
  logic [LOGM-1:0] ind_r_dly;
  logic            rep0;
  logic [LOGM-1:0] waddr0;
  // stage 1
  logic            act1, rep1;
  logic [LOGM-1:0] cnt1, waddr1;
  particle_t       mem_q, rep_reg, mux_a, local_p, samp_in;
  // stage 2
  logic [LOGM-1:0] waddr2;
  logic            x_out_valid_int;
  particle_t       x_samp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act0 <= 1'b0;
      cnt0 <= '0;
    end else if (start) begin
      act0 <= 1'b1;
      cnt0 <= '0;
    end else if (act0) begin
      cnt0 <= cnt0 + 1'b1;
      if (cnt0 == LOGM'(M - 1))
        act0 <= 1'b0;
    end
  end

  // Comparator against the delayed Ind R gives Rep.
  assign rep0   = act0 && (cnt0 != '0) && (ind_r == ind_r_dly);
  assign waddr0 = !sel_int ? cnt0 : (rep0 ? ind_d : ind_r);
  assign en_r   = act0;
  assign en_d   = act0 && sel_int && rep0;

  particle_memory #(.M(M)) u_pmem (
    .clk,
    .raddr(ind_r),
    .rdata(mem_q),
    .we(x_out_valid_int),
    .waddr(waddr2),
    .wdata(x_samp)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ind_r_dly <= '0;
      act1      <= 1'b0;
      rep1      <= 1'b0;
      cnt1      <= '0;
      waddr1    <= '0;
      waddr2    <= '0;
      rep_reg   <= '0;
    end else begin
      if (act0) ind_r_dly <= ind_r;
      act1   <= act0;
      rep1   <= rep0;
      cnt1   <= cnt0;
      waddr1 <= waddr0;
      waddr2 <= waddr1;
      if (act1) rep_reg <= mux_a;
    end
  end

  // Sub-block (a), Sel Int mux, sub-block (b).
  always_comb begin
    mux_a   = rep1 ? rep_reg : mem_q;
    local_p = sel_int ? mux_a : x0_ugv;
    samp_in = (cnt1 < LOGM'(M / 2)) ? route_in : local_p;
  end

  assign route_out       = local_p;
  assign route_out_valid = act1;

  sampling_block #(.STD(STD)) u_samp (
    .clk, .rst_n,
    .in_valid(act1),
    .x_in(samp_in),
    .prn_x, .prn_y,
    .out_valid(x_out_valid_int),
    .x_out(x_samp)
  );

  assign x_out_valid = x_out_valid_int;
  assign x_out       = x_samp;
  assign addr_w      = waddr2;   // the Buffer of the write address

endmodule
