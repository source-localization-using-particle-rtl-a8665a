// tb_sub_filter: one sub-filter whose routing output is looped back to its
// own input (a ring of one), vehicle at the origin, heading 0.
// Iteration 1 initialises the particles around the vehicle; then the only
// lit photodiode is number 3 for several iterations. Checked per iteration:
// M sampled particles, populations summing to M, done within the 4M + tau
// budget (tau = ITER + 20). Checked over the run: replicas were taken from
// the replica register (Rep) at least once, and after the iterations with
// sector 3 lit that sector holds clearly more than its uniform share M/8,
// i.e. importance weighting and resampling moved the particle cloud.
module tb_sub_filter;
  import pf_pkg::*;
  localparam int M = 32, ITER = 14;
  logic clk = 0, rst_n = 0, start = 0, sel_int = 0;
  particle_t x_ugv, route, x_out;
  angle_t phi_ugv;
  logic [7:0] z;
  logic [15:0] prn_x, prn_y;
  logic x_out_valid, busy, done;
  logic [7:0][5:0] count;
  int checks = 0, failures = 0, reps = 0, last_cyc = 0;

  sub_filter #(.M(M), .ITER(ITER)) dut (
    .clk, .rst_n, .start, .sel_int, .x_ugv, .phi_ugv, .z, .prn_x, .prn_y,
    .route_in(route), .route_out(route), .x_out_valid, .x_out, .count, .busy, .done
  );

  always #5 clk = ~clk;
  always @(negedge clk) begin prn_x = 16'($urandom); prn_y = 16'($urandom); end
  always @(posedge clk) if (rst_n && dut.u_samp.en_d) reps++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic iterate(input logic si, input logic [7:0] zz);
    int cyc, nout, tot;
    z = zz;
    @(negedge clk) begin sel_int = si; start = 1; end
    @(negedge clk) start = 0;
    cyc = 1; nout = 0;
    while (!done && cyc < 1000) begin
      if (x_out_valid) nout++;
      @(negedge clk); cyc++;
    end
    tot = 0;
    for (int n = 0; n < 8; n++) tot += int'(count[n]);
    checks += 3;
    if (nout != M) failures++;
    if (tot != M) failures++;
    if (si) last_cyc = cyc;
    if (cyc > 4 * M + ITER + 20) begin
      failures++;
      $display("iteration took %0d cycles", cyc);
    end
  endtask

  initial begin
    x_ugv = '0; phi_ugv = '0; z = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    iterate(1'b0, 8'b0000_0100);
    for (int it = 0; it < 8; it++) iterate(1'b1, 8'b0000_0100);
    $display("iteration length %0d cycles", last_cyc);
    $display("sector 3 population %0d of %0d, %0d replicas", count[2], M, reps);
    checks++;
    if (int'(count[2]) < M / 4) begin
      failures++;
      $display("sector 3 holds %0d of %0d particles", count[2], M);
    end
    checks++;
    if (reps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
