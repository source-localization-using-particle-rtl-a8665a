// tb_cordic_atan2: random vectors in all four quadrants, one per cycle.
// Expected angle from the real-valued $atan2, in 4096-per-turn units, within
// 2 LSB (modulo one turn). Also checks the latency of ITER + 1 cycles.
module tb_cordic_atan2;
  localparam int ITER = 14;
  localparam int LAT = ITER + 1;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [16:0] dx = '0, dy = '0;
  logic [7:0] tag_in = '0, tag_out;
  logic [11:0] theta;
  int checks = 0, failures = 0;
  int expq [256];
  int issue_cyc [256];
  int cyc = 0;

  cordic_atan2 #(.IN_W(17), .ITER(ITER), .TW(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int d;
    d = (int'(theta) - expq[tag_out]) & 4095;
    if (d > 2048) d = 4096 - d;
    checks++;
    if (d > 2 || (cyc - issue_cyc[tag_out]) != LAT) begin
      failures++;
      if (failures < 5) $display("tag %0d got %0d exp %0d lat %0d", tag_out, theta, expq[tag_out], cyc - issue_cyc[tag_out]);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 256; n++) begin
      real a;
      int mag;
      @(negedge clk);
      mag = $urandom_range(1000, 60000);
      a = real'($urandom_range(0, 359999)) / 360000.0 * 6.283185307179586;
      dx = 17'(int'(real'(mag) * $cos(a)));
      dy = 17'(int'(real'(mag) * $sin(a)));
      a = $atan2(real'(dy), real'(dx));
      if (a < 0) a += 6.283185307179586;
      expq[n] = int'(a / 6.283185307179586 * 4096.0) & 4095;
      tag_in = 8'(n);
      issue_cyc[n] = cyc;
      in_valid = 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
