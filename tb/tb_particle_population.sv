// tb_particle_population: random sector streams of M particles with gaps;
// the eight counters must equal a histogram kept by the testbench, and clr
// must zero them.
module tb_particle_population;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, clr = 0, valid = 0;
  logic [2:0] sector = '0;
  logic [7:0][5:0] count;
  int checks = 0, failures = 0;
  int hist [8];

  particle_population #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int n = 0; n < 8; n++) hist[n] = 0;
      for (int n = 0; n < 8; n++) begin
        checks++;
        if (count[n] != 0) failures++;
      end
      for (int i = 0; i < M; i++) begin
        int s;
        s = (it % 4 == 0) ? 5 : $urandom_range(0, 7);
        valid = 1; sector = 3'(s); hist[s]++;
        @(negedge clk);
        valid = 0; sector = 3'($urandom);
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      @(negedge clk);
      for (int n = 0; n < 8; n++) begin
        checks++;
        if (int'(count[n]) != hist[n]) begin
          failures++;
          if (failures < 5) $display("it %0d sector %0d got %0d exp %0d", it, n, count[n], hist[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
