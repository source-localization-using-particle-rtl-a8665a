// tb_importance_unit: M particles placed at known bearings (sector centres
// +-15 degrees, relative to a random vehicle heading) and distances around a
// random vehicle position, with random write addresses and photodiode bits.
// Expected: the sector populations exactly, each stored weight and the sum
// within the truncation tolerance of the real-valued likelihood product,
// and done within M + ITER + 8 cycles of the first particle.
module tb_importance_unit;
  import pf_pkg::*;
  localparam int M = 32;
  localparam int ITER = 14;
  localparam real A = 0.8, B = 0.6, PI = 3.141592653589793;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, rd_mode = 0, done;
  particle_t x_in, x_ugv;
  logic [4:0] addr_w = '0, w_raddr = '0;
  angle_t phi_ugv;
  logic [7:0] z;
  weight_t w_rdata;
  logic [20:0] sum_w;
  logic [7:0][5:0] count;
  int checks = 0, failures = 0;

  importance_unit #(.M(M), .ITER(ITER)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run();
    int sect [M], perm [M], hist [8];
    real we [M], sumr;
    int cyc;
    x_ugv.x = coord_t'($urandom_range(0, 8000) - 4000);
    x_ugv.y = coord_t'($urandom_range(0, 8000) - 4000);
    phi_ugv = angle_t'($urandom);
    z = 8'($urandom);
    for (int i = 0; i < M; i++) perm[i] = i;
    perm.shuffle();
    for (int n = 0; n < 8; n++) hist[n] = 0;
    sumr = 0;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    cyc = 0;
    for (int i = 0; i < M; i++) begin
      real rel, ab, rng, p;
      int s;
      s = $urandom_range(0, 7);                       // 0-based sector
      rel = (real'(s) + 0.5) * PI / 4.0 + (real'($urandom_range(0, 60)) - 30.0) * PI / 360.0;
      ab = rel + real'(phi_ugv) / 4096.0 * 2.0 * PI;
      rng = real'($urandom_range(5, 60)) * 256.0;
      x_in.x = coord_t'(int'(x_ugv.x) + int'(rng * $cos(ab)));
      x_in.y = coord_t'(int'(x_ugv.y) + int'(rng * $sin(ab)));
      addr_w = 5'(perm[i]);
      in_valid = 1;
      sect[perm[i]] = s;
      hist[s]++;
      p = 1.0;
      for (int j = 0; j < 8; j++)
        if (j == s) p *= z[j] ? A : 1.0 - A;
        else        p *= z[j] ? A * B : 1.0 - A * B;
      we[perm[i]] = p * 65536.0;
      sumr += p * 65536.0;
      @(negedge clk); cyc++;
    end
    in_valid = 0;
    while (!done && cyc < 200) begin @(negedge clk); cyc++; end
    checks++;
    if (!done || cyc > M + ITER + 8) begin
      failures++;
      $display("done after %0d cycles", cyc);
    end
    @(negedge clk);
    for (int n = 0; n < 8; n++) begin
      checks++;
      if (int'(count[n]) != hist[n]) begin
        failures++;
        if (failures < 6) $display("sector %0d count %0d exp %0d", n, count[n], hist[n]);
      end
    end
    checks++;
    if (real'(sum_w) > sumr + 1.0 || real'(sum_w) < sumr * 0.99 - 4.0 * M) failures++;
    rd_mode = 1;
    for (int a = 0; a < M; a++) begin
      w_raddr = 5'(a);
      @(negedge clk);
      checks++;
      if (real'(w_rdata) > we[a] + 1.0 || real'(w_rdata) < we[a] * 0.99 - 4.0) begin
        failures++;
        if (failures < 6) $display("addr %0d weight %0d exp %f", a, w_rdata, we[a]);
      end
    end
    rd_mode = 0;
  endtask

  initial begin
    x_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
