// tb_weight_memory: fills the weight memory, then reads every word back
// with one cycle of latency and checks a rewrite.
module tb_weight_memory;
  import pf_pkg::*;
  localparam int M = 32;
  logic clk = 0, we = 0;
  logic [4:0] addr = '0;
  weight_t wdata = '0, rdata;
  weight_t model [M];
  int checks = 0, failures = 0;

  weight_memory #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < M; a++) begin
        @(negedge clk);
        we = 1; addr = 5'(a); wdata = weight_t'($urandom);
        model[a] = wdata;
      end
      @(negedge clk) we = 0;
      for (int a = M - 1; a >= 0; a--) begin
        @(negedge clk) addr = 5'(a);
        @(negedge clk);
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          if (failures < 5) $display("addr %0d got %h exp %h", a, rdata, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
