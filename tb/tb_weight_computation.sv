// tb_weight_computation: all 8 sectors x 256 photodiode patterns. The
// expected weight is the real-valued product of the eight likelihood factors
// (alpha / 1-alpha in the particle's sector, alpha*beta / 1-alpha*beta
// elsewhere) times 65536; the fixed-point result must lie within 1% + 4 LSB
// below it (truncation only rounds down) and arrive after 3 cycles.
module tb_weight_computation;
  import pf_pkg::*;
  localparam real A = 0.8;
  localparam real B = 0.6;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] sector = '0;
  logic [7:0] z = '0;
  logic [10:0] tag_in = '0, tag_out;
  weight_t weight;
  int checks = 0, failures = 0;
  real expw [2048];

  weight_computation #(.ALPHA(16'd52429), .BETA(16'd39322), .TW(11)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [2:0] vpipe = '0;
  always @(posedge clk) vpipe <= {vpipe[1:0], in_valid};

  always @(negedge clk) if (rst_n && out_valid) begin
    real e;
    e = expw[tag_out];
    checks++;
    if (real'(weight) > e + 1.0 || real'(weight) < e * 0.99 - 4.0 || !vpipe[2]) begin
      failures++;
      if (failures < 5) $display("tag %0d got %0d exp %f", tag_out, weight, e);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 8; s++)
      for (int zz = 0; zz < 256; zz++) begin
        real p;
        p = 1.0;
        for (int j = 0; j < 8; j++)
          if (j == s) p *= zz[j] ? A : 1.0 - A;
          else        p *= zz[j] ? A * B : 1.0 - A * B;
        @(negedge clk);
        in_valid = 1; sector = 3'(s); z = 8'(zz); tag_in = 11'(s * 256 + zz);
        expw[s * 256 + zz] = p * 65536.0;
      end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
