// tb_lfsr_prng: checks the parallel LFSR against a serial bit-by-bit LFSR.
// A serial model with the same polynomial is stepped 2K times per clock; the
// 2K output words must equal its consecutive 16-bit windows, and a zero seed
// must be replaced by 1.
module tb_lfsr_prng;
  localparam int K = 8;
  localparam int L = 16;
  logic clk = 0, rst_n = 0, seed_load = 0;
  logic [L-1:0] seed = '0;
  logic [2*K-1:0][L-1:0] prn;
  int checks = 0, failures = 0;

  lfsr_prng #(.K(K), .L(L)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [L-1:0] ms;   // serial model state
  function automatic logic [L-1:0] step(input logic [L-1:0] s);
    return {s[0] ^ s[2] ^ s[3] ^ s[5], s[L-1:1]};
  endfunction

  initial begin
    logic [L-1:0] w;
    repeat (2) @(posedge clk);
    rst_n = 1;
    seed = 16'hACE1; seed_load = 1;
    @(posedge clk); #1 seed_load = 0;
    ms = 16'hACE1;
    for (int c = 0; c < 200; c++) begin
      // window j of the serial stream = state after j serial steps
      w = ms;
      for (int j = 0; j < 2*K; j++) begin
        checks++;
        if (prn[j] !== w) begin
          failures++;
          if (failures < 5) $display("cycle %0d word %0d: got %h exp %h", c, j, prn[j], w);
        end
        w = step(w);
      end
      ms = w;
      @(posedge clk); #1;
    end
    // zero seed
    seed = '0; seed_load = 1;
    @(posedge clk); #1 seed_load = 0;
    checks++;
    if (prn[0] !== 16'd1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
