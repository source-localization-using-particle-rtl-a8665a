// tb_systematic_resampler: random weight sets (uniform, one dominant weight,
// sparse, all equal). A behavioural copy of the systematic resampling loop
// (1-based as written in the algorithm, converted to 0-based) gives the
// expected replicated and discarded lists. Also checked: replicated list
// sorted, every particle either replicated or discarded exactly once, and at
// most 3M + 3 cycles from start to done.
module tb_systematic_resampler;
  import pf_pkg::*;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [20:0] sum_w = '0;
  logic [15:0] u0 = '0;
  logic [4:0] w_raddr, r_index, d_index;
  weight_t w_rdata;
  logic r_valid, d_valid, busy, done;
  int checks = 0, failures = 0;
  int tail_runs = 0;

  systematic_resampler #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight memory model, synchronous read
  weight_t wm [M];
  always @(posedge clk) w_rdata <= wm[w_raddr];

  int got_r[$], got_d[$];
  always @(posedge clk) if (rst_n) begin
    if (r_valid) got_r.push_back(int'(r_index));
    if (d_valid) got_d.push_back(int'(d_index));
  end

  task automatic run(input int kind);
    longint sum, aw, us, s;
    int p, cyc;
    int er[$], ed[$];
    int seen [M];
    sum = 0;
    for (int i = 0; i < M; i++) begin
      case (kind)
        0: wm[i] = weight_t'($urandom);
        1: wm[i] = (i == 7) ? 16'd60000 : weight_t'($urandom_range(0, 300));
        2: wm[i] = ($urandom_range(0, 5) == 0) ? weight_t'($urandom) : 16'd0;
        default: wm[i] = 16'd1000;
      endcase
      sum += longint'(wm[i]);
    end
    if (sum == 0) begin wm[3] = 16'd500; sum = 500; end
    u0 = 16'($urandom);
    // reference: algorithm with 1-based p
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
    for (int q = p; q < M; q++) ed.push_back(q);   // particles never reached
    got_r.delete(); got_d.delete();
    @(negedge clk);
    sum_w = 21'(sum); start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    if (p < M) tail_runs++;
    checks++;
    if (got_r != er || got_d != ed) begin
      failures++;
      if (failures < 8) begin foreach (got_r[i]) $write("%0d ", got_r[i]); $write("| "); foreach (er[i]) $write("%0d ", er[i]); $display(""); foreach (got_d[i]) $write("%0d ", got_d[i]); $write("| "); foreach (ed[i]) $write("%0d ", ed[i]); $display(""); end
      $display("kind %0d: lists differ (R %0d/%0d, D %0d/%0d)", kind, got_r.size(), er.size(), got_d.size(), ed.size());
    end
    checks++;
    if (cyc > 3 * M + 3) begin
      failures++;
      $display("kind %0d: %0d cycles", kind, cyc);
    end
    // properties
    for (int i = 0; i < M; i++) seen[i] = 0;
    for (int i = 0; i < got_d.size(); i++) seen[got_d[i]] += 2;
    for (int i = 0; i < got_r.size(); i++) begin
      if (i > 0 && got_r[i] < got_r[i-1]) seen[0] += 100;
      if (i == 0 || got_r[i] != got_r[i-1]) seen[got_r[i]] += 1;
    end
    for (int i = 0; i < M; i++) begin
      checks++;
      if (seen[i] != 1 && seen[i] != 2) failures++;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) run(n % 4);
    checks++;
    if (tail_runs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
