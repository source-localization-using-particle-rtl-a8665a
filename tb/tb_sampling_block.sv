// tb_sampling_block: random particles and random numbers; the expected
// position is computed with real arithmetic (PRN/32768 * std) and floored.
module tb_sampling_block;
  import pf_pkg::*;
  localparam logic [15:0] STD = 16'd640;   // 2.5 units
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  particle_t x_in = '0, x_out;
  logic [15:0] prn_x = '0, prn_y = '0;
  int checks = 0, failures = 0;

  sampling_block #(.STD(STD)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expv(input int c, input int prn);
    real d;
    int r;
    d = $floor(real'(prn) / 32768.0 * real'(STD));
    r = c + int'(d);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int ex, ey;
      @(negedge clk);
      in_valid = 1;
      x_in.x = coord_t'((n < 10) ? 32700 : $urandom);
      x_in.y = coord_t'((n >= 10 && n < 20) ? -32700 : $urandom);
      prn_x = (n < 10) ? 16'h7FFF : 16'($urandom);
      prn_y = (n >= 10 && n < 20) ? 16'h8000 : 16'($urandom);
      ex = expv(int'(x_in.x), int'($signed(prn_x)));
      ey = expv(int'(x_in.y), int'($signed(prn_y)));
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(x_out.x) != ex || int'(x_out.y) != ey) begin
        failures++;
        if (failures < 5) $display("n=%0d got %0d,%0d exp %0d,%0d", n, x_out.x, x_out.y, ex, ey);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
