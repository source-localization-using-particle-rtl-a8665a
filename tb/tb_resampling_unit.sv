// tb_resampling_unit: runs the resampler on random weights, then reads both
// index lists back through Counter R (one step per rd_en_r) and Counter D
// (one step per rd_en_d) as the sampling unit does, and compares them with a
// behavioural copy of the systematic resampling loop. Also checks that the
// number of discarded entries equals the number of repeated replicated ones.
module tb_resampling_unit;
  import pf_pkg::*;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, start = 0, rd_clr = 0, rd_en_r = 0, rd_en_d = 0;
  logic [20:0] sum_w = '0;
  logic [15:0] u0 = '0;
  logic [4:0] w_raddr, ind_r, ind_d;
  weight_t w_rdata;
  logic busy, done;
  int checks = 0, failures = 0;

  resampling_unit #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  weight_t wm [M];
  always @(posedge clk) w_rdata <= wm[w_raddr];

  task automatic run();
    longint sum, aw, us, s;
    int p, reps;
    int er[$], ed[$];
    sum = 0;
    for (int i = 0; i < M; i++) begin
      wm[i] = ($urandom_range(0, 2) == 0) ? weight_t'($urandom) : weight_t'($urandom_range(0, 2000));
      sum += longint'(wm[i]);
    end
    u0 = 16'($urandom);
    aw = sum >> 5;
    us = (longint'(u0) * aw) >> 16;
    s = 0; p = 0;
    for (int i = 1; i <= M; i++) begin
      while (s < us && p < M) begin
        p++;
        s += longint'(wm[p-1]);
        if (s < us) ed.push_back(p - 1);
      end
      us += aw;
      er.push_back(p == 0 ? 0 : p - 1);
    end
    for (int q = p; q < M; q++) ed.push_back(q);
    @(negedge clk);
    sum_w = 21'(sum); start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    @(negedge clk) rd_clr = 1;
    @(negedge clk) rd_clr = 0;
    // replicated list
    reps = 0;
    for (int i = 0; i < M; i++) begin
      checks++;
      if (int'(ind_r) != er[i]) failures++;
      if (i > 0 && er[i] == er[i-1]) reps++;
      rd_en_r = 1;
      @(negedge clk) rd_en_r = 0;
    end
    checks++;
    if (reps != ed.size()) failures++;
    for (int i = 0; i < ed.size(); i++) begin
      checks++;
      if (int'(ind_d) != ed[i]) failures++;
      rd_en_d = 1;
      @(negedge clk) rd_en_d = 0;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
