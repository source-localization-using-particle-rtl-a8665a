// tb_sector_check: random per-sub-filter sector counts; the totals and the
// arg-max sector (lowest on ties) are computed by the testbench.
module tb_sector_check;
  localparam int K = 8, M = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [K-1:0][7:0][5:0] count;
  logic [2:0] ind_theta;
  logic [7:0][8:0] total;
  int checks = 0, failures = 0;

  sector_check #(.K(K), .M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    count = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      int tot [8];
      int best;
      for (int n = 0; n < 8; n++) tot[n] = 0;
      for (int k = 0; k < K; k++)
        for (int n = 0; n < 8; n++) begin
          count[k][n] = (r % 5 == 0) ? 6'd4 : 6'($urandom_range(0, M / 4));
          tot[n] += int'(count[k][n]);
        end
      best = 0;
      for (int n = 1; n < 8; n++) if (tot[n] > tot[best]) best = n;
      @(negedge clk) in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (!out_valid || int'(ind_theta) != best) begin
        failures++;
        if (failures < 5) $display("got %0d exp %0d", ind_theta, best);
      end
      for (int n = 0; n < 8; n++) begin
        checks++;
        if (int'(total[n]) != tot[n]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
