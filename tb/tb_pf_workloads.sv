// tb_pf_workloads: the 2D localisation scenario run on several filter sizes
// and sensor qualities at once, one pf_top instance per configuration.
//
// Configurations (K sub-filters x M particles, alpha, beta):
//   0: 8 x 128 = 1024 particles, 0.8 / 0.6  (the size of the comparison table)
//   1: 4 x 64  =  256 particles, 0.8 / 0.6  (fewer, larger sub-filters)
//   2: 16 x 16 =  256 particles, 0.8 / 0.6  (more, smaller sub-filters)
//   3: 1 x 32  =   32 particles, 0.8 / 0.6  (single sub-filter, routes to itself)
//   4: 8 x 32  =  256 particles, 0.8 / 0.3  (less clutter)
//   5: 8 x 32  =  256 particles, 0.9 / 0.1  (good sensors)
// Each instance runs its own copy of the scenario of tb_pf_top: source at
// (6, 22), vehicle from (38, -4), 250 steps, photodiode bits drawn with
// probability alpha in the source's sector and alpha*beta elsewhere, vehicle
// steered 0.3 units per step towards the reported sector.
//
// Checked for every configuration: each iteration ends within 4N/K + 50
// cycles (the execution-time formula with the latency of 50 cycles used for
// the published timing curves), and pos_valid / ind_valid pulse once per
// iteration. For the configurations with at least 256 particles the estimate
// must also come within 2.5 units of the source at some step and stay within
// 4 units on average over the last 50 steps. The 32-particle filter is only
// reported. The steps to localise are printed; with less clutter they
// should be fewer.
module tb_pf_workloads;
  import pf_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real SRC_X = 6.0, SRC_Y = 22.0;
  localparam int  STEPS = 250;
  localparam real STEP_LEN = 0.3;
  localparam int  NCFG = 6;
  localparam int  KS [NCFG] = '{8, 4, 16, 1, 8, 8};
  localparam int  MS [NCFG] = '{128, 64, 16, 32, 32, 32};
  localparam real AS [NCFG] = '{0.8, 0.8, 0.8, 0.8, 0.8, 0.9};
  localparam real BS [NCFG] = '{0.6, 0.6, 0.6, 0.6, 0.3, 0.1};

  logic clk = 0, rst_n = 0;
  logic [NCFG-1:0] fin = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial begin
    repeat (STEPS * 700 + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 0-based sector (counter-clockwise from the heading) that holds the source
  function automatic int source_sector(input real ux, input real uy, input real head);
    real a;
    a = $atan2(SRC_Y - uy, SRC_X - ux) - head;
    while (a < 0.0) a += 2.0 * PI;
    while (a >= 2.0 * PI) a -= 2.0 * PI;
    return (a == 0.0) ? 7 : int'($ceil(a / (PI / 4.0))) - 1;
  endfunction

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int KK = KS[g];
    localparam int MM = MS[g];
    localparam int NN = KK * MM;
    localparam int CYC_MAX = 4 * MM + 50;

    logic seed_load = 0, start = 0, init = 0;
    logic [15:0] seed = 16'h1D2B + 16'(g * 977);
    logic [7:0] z = '0;
    angle_t phi_ugv = '0;
    particle_t x_ugv, pos;
    logic pos_valid, ind_valid, busy, done;
    logic [2:0] ind_theta;
    logic [7:0][$clog2(NN+1)-1:0] sector_total;
    int n_pos = 0, n_ind = 0;

    pf_top #(
      .K(KK), .M(MM),
      .ALPHA(16'(int'(AS[g] * 65536.0))),
      .BETA(16'(int'(BS[g] * 65536.0)))
    ) dut (.*);

    always @(posedge clk) if (rst_n) begin
      if (pos_valid) n_pos++;
      if (ind_valid) n_ind++;
    end

    initial begin
      real ux, uy, head, err, err_tail;
      int t_loc, cyc, cyc_max, s, np, ni;
      ux = 38.0; uy = -4.0; head = 0.0;
      t_loc = -1; err_tail = 0.0; cyc_max = 0;
      wait (rst_n);
      @(negedge clk) seed_load = 1;
      @(negedge clk) seed_load = 0;
      for (int t = 0; t < STEPS; t++) begin
        s = source_sector(ux, uy, head);
        for (int j = 0; j < 8; j++) begin
          int thr;
          thr = (j == s) ? int'(AS[g] * 10000.0) : int'(AS[g] * BS[g] * 10000.0);
          z[j] = ($urandom_range(0, 9999) < thr);
        end
        x_ugv.x = coord_t'(int'(ux * 256.0));
        x_ugv.y = coord_t'(int'(uy * 256.0));
        phi_ugv = angle_t'(int'(head / (2.0 * PI) * 4096.0));
        np = n_pos; ni = n_ind;
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        cyc = 1;
        while (!done && cyc < 4000) begin @(negedge clk); cyc++; end
        repeat (2) @(negedge clk);
        if (cyc > cyc_max) cyc_max = cyc;
        checks += 2;
        if (cyc > CYC_MAX) failures++;
        if (n_pos != np + 1 || n_ind != ni + 1) failures++;
        head = head + (real'(ind_theta) + 0.5) * PI / 4.0;
        while (head >= 2.0 * PI) head -= 2.0 * PI;
        ux += STEP_LEN * $cos(head);
        uy += STEP_LEN * $sin(head);
        err = $sqrt((real'(pos.x) / 256.0 - SRC_X) ** 2 + (real'(pos.y) / 256.0 - SRC_Y) ** 2);
        if (err < 2.5 && t_loc < 0) t_loc = t;
        if (t >= STEPS - 50) err_tail += err / 50.0;
      end
      $display("config %0d: K=%0d M=%0d N=%0d alpha=%3.1f beta=%3.1f: at most %0d cycles (bound %0d), localised at step %0d, last-50 mean error %5.2f",
               g, KK, MM, NN, AS[g], BS[g], cyc_max, CYC_MAX, t_loc, err_tail);
      if (NN >= 256) begin
        checks += 2;
        if (t_loc < 0) failures++;
        if (err_tail > 4.0) failures++;
      end
      fin[g] = 1'b1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (&fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
