// tb_particle_memory: writes random particles, reads them back with one
// cycle of latency, including reads and writes in the same cycle.
module tb_particle_memory;
  import pf_pkg::*;
  localparam int M = 32;
  logic clk = 0;
  logic [4:0] raddr = '0, waddr = '0;
  logic we = 0;
  particle_t rdata, wdata;
  particle_t model [M];
  int checks = 0, failures = 0;

  particle_memory #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wdata = '0;
    for (int a = 0; a < M; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = particle_t'($urandom);
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 300; n++) begin
      logic [4:0] ra;
      particle_t exp_d;
      @(negedge clk);
      ra = 5'($urandom); raddr = ra;
      we = $urandom_range(0, 1);
      waddr = 5'($urandom); wdata = particle_t'($urandom);
      exp_d = model[ra];          // old contents on a same-address write
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        if (failures < 5) $display("addr %0d got %h exp %h", ra, rdata, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
