// tb_index_memory: synchronous writes, combinational reads of the index list.
module tb_index_memory;
  localparam int M = 32;
  logic clk = 0, we = 0;
  logic [4:0] waddr = '0, wdata = '0, raddr = '0, rdata;
  logic [4:0] model [M];
  int checks = 0, failures = 0;

  index_memory #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < M; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = 5'($urandom);
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 200; n++) begin
      raddr = 5'($urandom);
      #1;
      checks++;
      if (rdata !== model[raddr]) failures++;
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        we = 1; waddr = 5'($urandom); wdata = 5'($urandom);
        @(negedge clk);
        model[waddr] = wdata;
        we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
