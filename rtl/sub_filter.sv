// sub_filter: one sampling-importance-resampling filter over M particles.
//
// A start pulse begins one iteration. The sampling and routing unit streams
// the M particles (resampled ones, or at the first iteration particles spread
// around x0_ugv) through the motion model, exchanging the first M/2 with the
// ring neighbours, and hands each new particle to the importance unit, which
// runs pipelined behind it. When the M-th weight is written the resampling
// unit starts on the weights and their sum and produces the replicated and
// discarded index lists that the sampling unit reads in the next iteration.
// The phases and their order follow the design description; the controller
// that sequences them is this design's.
//
// Interface: sel_int = 0 selects the initialisation iteration. prn_x/prn_y
// are this sub-filter's random numbers; prn_x at the cycle the resampler
// starts is also its U0. x_ugv, phi_ugv and z must stay stable from start
// until done. route_in/route_out connect to the previous/next sub-filter.
// x_out/x_out_valid carry the M sampled particles; count and done follow the
// importance step; done pulses at the end of the iteration.
//
// Timing: sampling M cycles plus 3 cycles of latency, importance overlapped
// with it and ending ITER + 6 cycles after the last particle, then resampling
// of at most 3M + 2 cycles: about 4M + ITER + 14 cycles per iteration.
module sub_filter
  import pf_pkg::*;
#(
  parameter int unsigned M     = 32,
  parameter logic [15:0] STD   = 16'd256,
  parameter logic [15:0] ALPHA = 16'd52429,
  parameter logic [15:0] BETA  = 16'd39322,
  parameter int unsigned ITER  = 14
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic                        sel_int,
  input  particle_t                   x_ugv,
  input  angle_t                      phi_ugv,
  input  logic [7:0]                  z,
  input  logic [15:0]                 prn_x,
  input  logic [15:0]                 prn_y,
  input  particle_t                   route_in,
  output particle_t                   route_out,
  output logic                        x_out_valid,
  output particle_t                   x_out,
  output logic [7:0][$clog2(M+1)-1:0] count,
  output logic                        busy,
  output logic                        done
);
  localparam int unsigned LOGM = $clog2(M);

  typedef enum logic [1:0] {S_IDLE, S_SAMPLE, S_RESAMPLE} phase_t;
  phase_t phase;

  logic                   sel_int_q;
  logic [LOGM-1:0]        ind_r, ind_d, addr_w, w_raddr;
  logic                   en_r, en_d, route_out_valid;
  logic                   imp_done, rs_start, rs_done;
  weight_t                w_rdata;
  logic [WW+LOGM-1:0]     sum_w;

  assign rs_start = (phase == S_SAMPLE) && imp_done;
  assign busy     = (phase != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= S_IDLE;
      sel_int_q <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        S_IDLE:     if (start) begin
                      phase     <= S_SAMPLE;
                      sel_int_q <= sel_int;
                    end
        S_SAMPLE:   if (imp_done) phase <= S_RESAMPLE;
        S_RESAMPLE: if (rs_done) begin
                      phase <= S_IDLE;
                      done  <= 1'b1;
                    end
        default:    phase <= S_IDLE;
      endcase
    end
  end

  sampling_routing_unit #(.M(M), .STD(STD)) u_samp (
    .clk, .rst_n,
    .start(start && phase == S_IDLE),
    .sel_int(sel_int_q),
    .x0_ugv(x_ugv),
    .prn_x, .prn_y,
    .ind_r, .ind_d, .en_r, .en_d,
    .route_out, .route_out_valid, .route_in,
    .x_out_valid, .x_out, .addr_w
  );

  importance_unit #(.M(M), .ALPHA(ALPHA), .BETA(BETA), .ITER(ITER)) u_imp (
    .clk, .rst_n,
    .clr(start && phase == S_IDLE),
    .in_valid(x_out_valid), .x_in(x_out), .addr_w,
    .x_ugv, .phi_ugv, .z,
    .rd_mode(phase == S_RESAMPLE),
    .w_raddr, .w_rdata, .sum_w, .count, .done(imp_done)
  );

  resampling_unit #(.M(M)) u_rs (
    .clk, .rst_n,
    .start(rs_start), .sum_w, .u0(prn_x),
    .w_raddr, .w_rdata, .busy(), .done(rs_done),
    .rd_clr(start && phase == S_IDLE), .rd_en_r(en_r), .rd_en_d(en_d),
    .ind_r, .ind_d
  );

endmodule
