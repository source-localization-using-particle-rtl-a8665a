// tb_filter_bank: a ring of K = 4 sub-filters of M = 8 particles with the
// random numbers driven by the testbench. Iteration 1 (initialisation) adds a
// different fixed x-offset in each sub-filter, so every particle of
// sub-filter k sits at x0 + 32k. Iteration 2 uses zero random numbers: the
// first M/2 particles sampled by sub-filter k must then be those of
// sub-filter k-1 (and sub-filter 0 gets those of K-1), the last M/2 its own.
// Also checked: done once per iteration and populations summing to N.
module tb_filter_bank;
  import pf_pkg::*;
  localparam int K = 4, M = 8;
  logic clk = 0, rst_n = 0, start = 0, sel_int = 0;
  particle_t x_ugv;
  angle_t phi_ugv;
  logic [7:0] z;
  logic [2*K-1:0][15:0] prn;
  logic x_valid, busy, done;
  particle_t [K-1:0] x_out;
  logic [K-1:0][7:0][3:0] count;
  int checks = 0, failures = 0;

  filter_bank #(.K(K), .M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic iterate(input logic si, input int check_route);
    int cyc, i, tot;
    @(negedge clk) begin sel_int = si; start = 1; end
    @(negedge clk) start = 0;
    cyc = 0; i = 0;
    while (!done && cyc < 500) begin
      if (x_valid) begin
        for (int k = 0; k < K; k++) begin
          int src, ex;
          src = (i < M / 2) ? (k + K - 1) % K : k;
          ex = int'(x_ugv.x) + 32 * src;
          if (check_route) begin
            checks++;
            if (int'(x_out[k].x) != ex || x_out[k].y != x_ugv.y) begin
              failures++;
              if (failures < 6) $display("cycle %0d sf %0d got %0d exp %0d", i, k, x_out[k].x, ex);
            end
          end
        end
        i++;
      end
      @(negedge clk); cyc++;
    end
    checks += 2;
    if (!done || i != M) failures++;
    tot = 0;
    for (int k = 0; k < K; k++) for (int n = 0; n < 8; n++) tot += int'(count[k][n]);
    if (tot != K * M) failures++;
  endtask

  initial begin
    x_ugv.x = 16'sd1280; x_ugv.y = 16'sd512; phi_ugv = 12'd100; z = 8'h81;
    for (int k = 0; k < K; k++) begin prn[k] = 16'(k * 4096); prn[k+K] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    iterate(1'b0, 0);
    prn = '0;
    iterate(1'b1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
