// tb_pf_top: end-to-end source localisation with the filter at its default
// size (K = 8 sub-filters of M = 32 particles, N = 256).
//
// Scenario of the 2D experiment: light source at (6, 22), vehicle starting at
// (38, -4), alpha = 0.8, beta = 0.6, 250 time steps. In every step the
// testbench draws the eight photodiode bits: the photodiode whose 45-degree
// sector (measured from the vehicle heading) contains the source reads 1 with
// probability alpha, every other one with probability alpha*beta (clutter).
// After the filter's iteration the vehicle turns to the centre of the sector
// reported by the sector check and moves 0.3 units that way.
//
// Checked: every iteration ends within 178 cycles (the cycle count given for
// N = 256, K = 8), pos_valid and ind_valid once per iteration, the vehicle
// ends closer to the source than it started, the estimate comes within 2.5
// units of the source (the localisation threshold of the experiment) at some
// step, and its mean error over the last 50 steps is below ERR_MAX units. Counted, and each required at least
// once: initialisation iteration, particles routed from the ring neighbour,
// replicas served from the replica register, discarded-list tails appended
// by the resampler, and iterations with a non-zero heading.
module tb_pf_top;
  import pf_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real SRC_X = 6.0, SRC_Y = 22.0;
  localparam real ALPHA = 0.8, BETA = 0.6;
  localparam int  STEPS = 250;
  localparam real ERR_MAX = 4.0;
  localparam real STEP_LEN = 0.3;

  logic clk = 0, rst_n = 0, seed_load = 0, start = 0, init = 0;
  logic [15:0] seed = 16'h1D2B;
  logic [7:0] z = '0;
  angle_t phi_ugv = '0;
  particle_t x_ugv, pos;
  logic pos_valid, ind_valid, busy, done;
  logic [2:0] ind_theta;
  logic [7:0][8:0] sector_total;
  int checks = 0, failures = 0;

  pf_top dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (STEPS * 200 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_init = 0, n_routed = 0, n_rep = 0, n_tail = 0, n_heading = 0, n_pos = 0, n_ind = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_bank.g_sf[0].u_sf.u_samp.en_d) n_rep++;
    if (dut.u_bank.g_sf[0].u_sf.u_samp.act1 && dut.u_bank.g_sf[0].u_sf.u_samp.sel_int
        && dut.u_bank.g_sf[0].u_sf.u_samp.cnt1 < 5'(16)) n_routed++;
    if (dut.u_bank.g_sf[0].u_sf.u_rs.u_sr.state == 3'd4) n_tail++;
    if (pos_valid) n_pos++;
    if (ind_valid) n_ind++;
  end

  real ux, uy, head;

  function automatic int bearing_sector(input real sx, input real sy);
    real a;
    a = $atan2(sy - uy, sx - ux) - head;
    while (a < 0.0) a += 2.0 * PI;
    while (a >= 2.0 * PI) a -= 2.0 * PI;
    return int'($ceil(a / (PI / 4.0))) - 1;   // 0-based sector
  endfunction

  initial begin
    real d0, err, err_tail;
    int t_loc;
    int cyc, s;
    ux = 38.0; uy = -4.0; head = 0.0;
    t_loc = -1; err_tail = 0.0;
    d0 = $sqrt((ux - SRC_X) ** 2 + (uy - SRC_Y) ** 2);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) seed_load = 1;
    @(negedge clk) seed_load = 0;
    for (int t = 0; t < STEPS; t++) begin
      int np, ni;
      s = bearing_sector(SRC_X, SRC_Y);
      if (s < 0) s = 7;
      for (int j = 0; j < 8; j++) begin
        int thr;
        thr = (j == s) ? int'(ALPHA * 10000.0) : int'(ALPHA * BETA * 10000.0);
        z[j] = ($urandom_range(0, 9999) < thr);
      end
      x_ugv.x = coord_t'(int'(ux * 256.0));
      x_ugv.y = coord_t'(int'(uy * 256.0));
      phi_ugv = angle_t'(int'(head / (2.0 * PI) * 4096.0));
      if (phi_ugv != 0) n_heading++;
      if (t == 0) n_init++;
      np = n_pos; ni = n_ind;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
      repeat (2) @(negedge clk);
      checks++;
      if (cyc > 178) begin
        failures++;
        $display("step %0d: iteration took %0d cycles", t, cyc);
      end
      checks++;
      if (n_pos != np + 1 || n_ind != ni + 1) failures++;
      // steer to the centre of the most populated sector
      head = head + (real'(ind_theta) + 0.5) * PI / 4.0;
      while (head >= 2.0 * PI) head -= 2.0 * PI;
      ux += STEP_LEN * $cos(head);
      uy += STEP_LEN * $sin(head);
      err = $sqrt((real'(pos.x) / 256.0 - SRC_X) ** 2 + (real'(pos.y) / 256.0 - SRC_Y) ** 2);
      if (err < 2.5 && t_loc < 0) t_loc = t;
      if (t >= STEPS - 50) err_tail += err / 50.0;
      if (t % 25 == 0 || t == STEPS - 1) begin
        err = $sqrt((real'(pos.x) / 256.0 - SRC_X) ** 2 + (real'(pos.y) / 256.0 - SRC_Y) ** 2);
        $display("step %3d: vehicle (%6.2f,%6.2f) estimate (%6.2f,%6.2f) error %5.2f, %0d cycles",
                 t, ux, uy, real'(pos.x) / 256.0, real'(pos.y) / 256.0, err, cyc);
      end
    end
    $display("localised (error < 2.5) at step %0d, mean error over the last 50 steps %5.2f", t_loc, err_tail);
    checks += 2;
    if (t_loc < 0) failures++;
    if (err_tail > ERR_MAX) failures++;
    checks++;
    if ($sqrt((ux - SRC_X) ** 2 + (uy - SRC_Y) ** 2) >= d0) failures++;
    $display("mechanisms: init %0d, routed %0d, replicas %0d, discard tails %0d, headings %0d",
             n_init, n_routed, n_rep, n_tail, n_heading);
    checks += 5;
    if (n_init == 0) failures++;
    if (n_routed == 0) failures++;
    if (n_rep == 0) failures++;
    if (n_tail == 0) failures++;
    if (n_heading == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
