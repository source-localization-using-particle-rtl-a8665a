// tb_mean_estimation: K particles per cycle for M cycles; pos must equal the
// floor of the exact mean (sum over N, arithmetic shift) and pos_valid must
// pulse the cycle after the M-th input.
module tb_mean_estimation;
  import pf_pkg::*;
  localparam int K = 8, M = 32;
  logic clk = 0, rst_n = 0, clr = 0, valid = 0, pos_valid;
  particle_t [K-1:0] x_in;
  particle_t pos;
  int checks = 0, failures = 0;

  mean_estimation #(.K(K), .M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      longint sx, sy;
      int base;
      sx = 0; sy = 0;
      base = (r % 3 == 0) ? -30000 : 0;
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int i = 0; i < M; i++) begin
        for (int k = 0; k < K; k++) begin
          x_in[k].x = coord_t'(base + $urandom_range(0, 2000));
          x_in[k].y = coord_t'($urandom);
          sx += longint'(x_in[k].x);
          sy += longint'(x_in[k].y);
        end
        valid = 1;
        @(negedge clk);
        valid = 0;
        if (i < M - 1) begin
          checks++;
          if (pos_valid) failures++;
        end
      end
      checks++;
      if (!pos_valid || longint'(pos.x) != (sx >>> 8) || longint'(pos.y) != (sy >>> 8)) begin
        failures++;
        if (failures < 5) $display("got %0d,%0d exp %0d,%0d", pos.x, pos.y, sx >>> 8, sy >>> 8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
