// resampling_unit: systematic resampler with its replicated (Ind R) and
// discarded (Ind D) index memories and their counters.
//
// While resampling, Counter R and Counter D are the write addresses of the two
// index memories and advance with the resampler's r_valid / d_valid strobes.
// During the following sampling phase the same counters are the read
// addresses: Counter R advances every sampling cycle (rd_en_r) and Counter D
// only when a replica needs a discarded slot (rd_en_d). Both counters are
// cleared by start and by rd_clr. The structure follows the design
// description; sharing the counters between writing and reading is this
// design's choice.
//
// Timing: see systematic_resampler (at most 3M + 2 cycles, then done). The
// index reads are asynchronous: ind_r / ind_d show the entry at the current
// counter value in the same cycle.
module resampling_unit
  import pf_pkg::*;
#(
  parameter int unsigned M = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [WW+$clog2(M)-1:0] sum_w,
  input  logic [15:0]             u0,
  output logic [$clog2(M)-1:0]    w_raddr,
  input  weight_t                 w_rdata,
  output logic                    busy,
  output logic                    done,
  input  logic                    rd_clr,
  input  logic                    rd_en_r,
  input  logic                    rd_en_d,
  output logic [$clog2(M)-1:0]    ind_r,
  output logic [$clog2(M)-1:0]    ind_d
);
  localparam int unsigned LOGM = $clog2(M);

  logic            r_valid, d_valid;
  logic [LOGM-1:0] r_index, d_index;
  logic [LOGM-1:0] cnt_r, cnt_d;

  systematic_resampler #(.M(M)) u_sr (
    .clk, .rst_n, .start, .sum_w, .u0, .w_raddr, .w_rdata,
    .r_valid, .r_index, .d_valid, .d_index, .busy, .done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_r <= '0;
      cnt_d <= '0;
    end else if (start || rd_clr) begin
      cnt_r <= '0;
      cnt_d <= '0;
    end else begin
      if (r_valid || rd_en_r) cnt_r <= cnt_r + 1'b1;
      if (d_valid || rd_en_d) cnt_d <= cnt_d + 1'b1;
    end
  end

  index_memory #(.M(M)) u_rmem (
    .clk, .we(r_valid), .waddr(cnt_r), .wdata(r_index), .raddr(cnt_r), .rdata(ind_r)
  );
  index_memory #(.M(M)) u_dmem (
    .clk, .we(d_valid), .waddr(cnt_d), .wdata(d_index), .raddr(cnt_d), .rdata(ind_d)
  );

endmodule
