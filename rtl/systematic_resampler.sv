// systematic_resampler: systematic resampling on un-normalized weights.
//
// Implements the resampling loop of the sub-filter:
//   A_w = Sum_w / M (a right shift by log2 M), U = U0 * A_w, s = p = 0;
//   for i = 1..M: while s < U { p++; s += w[p]; if s < U: emit discarded p }
//                 U += A_w; emit replicated p
// The weights need no normalisation because U is scaled by the sum instead.
// Indices are emitted 0-based. After the last replicated index, the particles
// that the loop never reached are emitted as discarded too, so the discarded
// list always holds every particle that is not replicated (the write-back of
// the sampling unit needs one discarded slot per replica). That tail is this
// design's addition; the loop itself, the shift and the U0 scaling follow the
// design description.
//
// Interface: start (pulse) with sum_w and u0 (16-bit fraction of one) valid.
// w_raddr drives the synchronous-read weight memory and w_rdata returns the
// word one cycle later. r_valid/r_index and d_valid/d_index are the write
// strobes of the replicated and discarded index lists (in order). done pulses
// for one cycle at the end.
//
// Timing: one cycle to scale U0, then each weight fetch takes two cycles
// (read, add/compare) and each replicated index one cycle, so the run takes
// at most 3M + 3 cycles from the start pulse to done, in line with the 3M cycles the
// design description gives for this step.
module systematic_resampler
  import pf_pkg::*;
#(
  parameter int unsigned M = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [WW+$clog2(M)-1:0]    sum_w,
  input  logic [15:0]                u0,
  output logic [$clog2(M)-1:0]       w_raddr,
  input  weight_t                    w_rdata,
  output logic                       r_valid,
  output logic [$clog2(M)-1:0]       r_index,
  output logic                       d_valid,
  output logic [$clog2(M)-1:0]       d_index,
  output logic                       busy,
  output logic                       done
);
  localparam int unsigned LOGM = $clog2(M);
  localparam int unsigned SW = WW + LOGM + 1;

  typedef enum logic [2:0] {IDLE, SCALE, LOOP, FETCH, TAIL, FINISH} state_t;
  state_t state;

  logic [SW-1:0]   aw, u, s, s_next;
  logic [LOGM:0]   p;        // particles visited so far, 0..M
  logic [LOGM-1:0] i;        // replicated indices emitted so far
  logic [SW+15:0]  u_prod;

  assign s_next  = s + SW'(w_rdata);
  assign u_prod  = (SW+16)'(aw) * (SW+16)'(u0);
  assign w_raddr = p[LOGM-1:0];
  assign busy    = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      aw      <= '0;
      u       <= '0;
      s       <= '0;
      p       <= '0;
      i       <= '0;
      r_valid <= 1'b0;
      r_index <= '0;
      d_valid <= 1'b0;
      d_index <= '0;
      done    <= 1'b0;
    end else begin
      r_valid <= 1'b0;
      d_valid <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          aw    <= SW'(sum_w >> LOGM);
          state <= SCALE;
        end
        SCALE: begin
          u     <= SW'(u_prod >> 16);
          s     <= '0;
          p     <= '0;
          i     <= '0;
          state <= LOOP;
        end
        LOOP: begin
          if (s < u && p < (LOGM+1)'(M)) begin
            state <= FETCH;             // weight memory reads w[p] now
          end else begin
            r_valid <= 1'b1;
            r_index <= (p == '0) ? '0 : LOGM'(p - 1'b1);
            u       <= u + aw;
            i       <= i + 1'b1;
            if (i == LOGM'(M - 1))
              state <= (p < (LOGM+1)'(M)) ? TAIL : FINISH;
          end
        end
        FETCH: begin
          s <= s_next;
          p <= p + 1'b1;
          if (s_next < u) begin
            d_valid <= 1'b1;
            d_index <= p[LOGM-1:0];
          end
          state <= LOOP;
        end
        TAIL: begin
          d_valid <= 1'b1;
          d_index <= p[LOGM-1:0];
          p       <= p + 1'b1;
          if (p == (LOGM+1)'(M - 1))
            state <= FINISH;
        end
        FINISH: begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
