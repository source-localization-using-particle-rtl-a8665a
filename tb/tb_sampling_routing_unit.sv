// tb_sampling_routing_unit: two phases through one sampling unit.
// Phase 1 (sel_int = 0): particles are x0 plus a per-cycle random step,
// written at counter addresses; the first M/2 come from route_in instead.
// Phase 2 (sel_int = 1): the testbench supplies a sorted replicated list with
// repeats and the matching discarded list. Expected for every cycle: the
// particle read (route_out) is the stored particle at Ind R, the sampled
// particle is route_in (first M/2) or that particle, plus PRN*std, and it is
// written at Ind R for a first copy and at the next Ind D for a repeat. The
// expected memory contents are tracked by the testbench.
module tb_sampling_routing_unit;
  import pf_pkg::*;
  localparam int M = 16;
  localparam logic [15:0] STD = 16'd256;
  logic clk = 0, rst_n = 0, start = 0, sel_int = 0;
  particle_t x0_ugv, route_out, route_in, x_out;
  logic [15:0] prn_x, prn_y;
  logic [3:0] ind_r, ind_d, addr_w;
  logic en_r, en_d, route_out_valid, x_out_valid;
  int checks = 0, failures = 0;
  int rep_seen = 0, route_seen = 0, local_seen = 0;

  sampling_routing_unit #(.M(M), .STD(STD)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // index lists as the resampling unit would present them
  int rl [M], dl [M];
  int cr = 0, cd = 0;
  always @(posedge clk) begin
    if (start) begin cr <= 0; cd <= 0; end
    else begin
      if (en_r) cr <= cr + 1;
      if (en_d) cd <= cd + 1;
    end
  end
  assign ind_r = 4'(rl[cr % M]);
  assign ind_d = 4'(dl[cd % M]);

  particle_t mem [M];
  particle_t exp_out [$], exp_route [$];
  int exp_addr [$];

  function automatic coord_t addn(input coord_t c, input logic [15:0] prn);
    int r;
    r = int'(c) + int'($floor(real'($signed(prn)) / 32768.0 * real'(STD)));
    return coord_t'(r);
  endfunction

  // drive a fresh PRN and route_in in every cycle, record the expectation at
  // the cycle the sampling block registers it (stage 1)
  int c1 = 0;
  logic act1_tb = 0;
  always @(negedge clk) begin
    prn_x = 16'($urandom);
    prn_y = 16'($urandom);
    route_in.x = coord_t'($urandom_range(0, 20000));
    route_in.y = coord_t'($urandom_range(0, 20000));
  end

  always @(posedge clk) if (rst_n && route_out_valid) begin
    particle_t src, e;
    src = (c1 < M / 2) ? route_in : route_out;
    if (c1 < M / 2) route_seen++; else local_seen++;
    e.x = addn(src.x, prn_x);
    e.y = addn(src.y, prn_y);
    exp_out.push_back(e);
  end

  int ph;           // 1 or 2
  int prev_r;
  always @(posedge clk) begin
    if (start) c1 <= 0;
  end

  // per-cycle check of stage-1 route_out and stage-2 output
  int n_out = 0;
  always @(negedge clk) if (rst_n) begin
    if (x_out_valid) begin
      checks++;
      if (exp_out.size() == 0 || x_out != exp_out[0] || int'(addr_w) != exp_addr[0]) begin
        failures++;
        if (failures < 6) $display("out %0d: got %h@%0d exp %h@%0d", n_out, x_out, addr_w, exp_out[0], exp_addr[0]);
      end
      mem[addr_w] = x_out;
      if (exp_out.size() > 0) exp_out.pop_front();
      if (exp_addr.size() > 0) exp_addr.pop_front();
      n_out++;
    end
  end

  always @(negedge clk) if (rst_n && route_out_valid) begin
    checks++;
    if (route_out != exp_route[0]) begin
      failures++;
      if (failures < 6) $display("route_out got %h exp %h", route_out, exp_route[0]);
    end
    exp_route.pop_front();
  end

  // stage-1 cycle index for the Sel Route choice
  always @(posedge clk) if (rst_n && !start) begin
    if (route_out_valid) c1 <= c1 + 1;
  end

  task automatic phase(input logic si);
    int d;
    // expectations of route_out and write addresses
    d = 0;
    for (int i = 0; i < M; i++) begin
      if (!si) begin
        exp_route.push_back(x0_ugv);
        exp_addr.push_back(i);
      end else begin
        exp_route.push_back(mem[rl[i]]);
        if (i > 0 && rl[i] == rl[i-1]) begin
          exp_addr.push_back(dl[d]); d++; rep_seen++;
        end else
          exp_addr.push_back(rl[i]);
      end
    end
    @(negedge clk);
    sel_int = si; start = 1;
    @(negedge clk) start = 0;
    repeat (M + 6) @(negedge clk);
  endtask

  initial begin
    x0_ugv.x = 16'sd2560; x0_ugv.y = -16'sd1024;
    for (int i = 0; i < M; i++) begin rl[i] = i; dl[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    phase(1'b0);
    for (int it = 0; it < 6; it++) begin
      // random sorted replicated list and the discarded complement
      int used [M];
      int nd;
      for (int i = 0; i < M; i++) used[i] = 0;
      rl[0] = $urandom_range(0, 3);
      for (int i = 1; i < M; i++) begin
        rl[i] = rl[i-1] + (($urandom_range(0, 2) == 0) ? 1 : 0);
        if (rl[i] > M - 1) rl[i] = M - 1;
      end
      for (int i = 0; i < M; i++) used[rl[i]] = 1;
      nd = 0;
      for (int i = 0; i < M; i++) if (!used[i]) begin dl[nd] = i; nd++; end
      phase(1'b1);
    end
    checks++;
    if (rep_seen == 0 || route_seen == 0 || local_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
