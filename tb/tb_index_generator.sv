// tb_index_generator: sector = ceil(4/pi * (theta - phi)) computed in real
// arithmetic for random and boundary angles; a result of 0 means sector 8.
module tb_index_generator;
  import pf_pkg::*;
  angle_t theta, phi_ugv;
  logic [2:0] sector;
  int checks = 0, failures = 0;

  index_generator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int th, input int ph);
    real d;
    int s;
    theta = angle_t'(th); phi_ugv = angle_t'(ph);
    #1;
    d = real'(((th - ph) % 4096 + 4096) % 4096) / 4096.0 * 6.283185307179586;
    s = int'($ceil(4.0 / 3.141592653589793 * d - 1e-9));
    if (s == 0) s = 8;
    checks++;
    if (int'(sector) != s - 1) begin
      failures++;
      if (failures < 5) $display("theta %0d phi %0d got %0d exp %0d", th, ph, sector + 1, s);
    end
  endtask

  initial begin
    for (int b = 0; b < 8; b++)
      for (int o = -1; o <= 1; o++)
        check((b * 512 + o + 4096) % 4096, 0);
    for (int n = 0; n < 2000; n++)
      check($urandom_range(0, 4095), $urandom_range(0, 4095));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
