// bbim_3spin_tb: the machine as a sampler at fixed beta = 1, without
// annealing, on a 3-spin problem, sweeping B from -2 to +2. The state after
// every sweep is recorded as a histogram of the 8 configurations (state
// value = m0 + 2 m1 + 4 m2, a bit being 1 for +1). Two effects of the
// Bounce-Bind term are checked:
//   * the share of sweeps whose state equals the previous one (the diagonal
//     of the state transition matrix) rises with B at every step;
//   * the share of sweeps in the ground state is lower at B = -1 than at
//     B = 0, and higher at B = +1 than at B = 0.
// The 3-spin couplings are this test's own (J01 = +1, J02 = J12 = -1,
// h2 = -1; ground state m = (+1, +1, -1), energy -4, state value 3). Fixed
// beta is beta0 = beta_end = 1 with rounds_per_step set to the run length,
// so the run ends after 20,000 sweeps. The random start state, the final
// state and the sample counts are matched with the reference model.
module bbim_3spin_tb;
  import bbim_pkg::*;
  import bbim_tb_pkg::*;
  localparam int N = 3, JW = 2, SWEEPS = 20000;

  logic clk = 0, rst_n = 0;
  logic j_we = 0, h_we = 0, s_we = 0, s_m = 0, seed_we = 0, start = 0;
  logic [$clog2(N)-1:0] j_row = '0, h_row = '0, s_idx = '0, j_col = '0;
  logic [JW-1:0] j_data = '0, h_data = '0;
  logic [31:0] seed = '0;
  bbim_cfg_t cfg = '0;
  logic busy, done, hit, energy_valid;
  beta_t beta;
  bb_t bb;
  count_t rounds, samples, hit_sample;
  logic [N-1:0] spins, best_state;
  energy_t energy, best_energy;

  bbim_top #(.N(N), .JW(JW)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bbim_model mdl;
  int hist [8];
  int stay;
  bit sampling = 0;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one sample per completed sweep
  always @(posedge clk) begin
    logic [N-1:0] prev;
    if (sampling && busy && rounds != 0 && $changed(rounds)) begin
      hist[spins]++;
      if (rounds > 1 && spins == prev) stay++;
      prev = spins;
    end
  end

  task automatic do_run(int b8, output real p_stay, output real p_ground);
    seed_we = 1; seed = 32'h3000_0000 + b8 + 16;
    @(negedge clk);
    seed_we = 0;
    cfg = '0;
    cfg.bb = B_W'(b8); cfg.beta0 = 8; cfg.beta_step = 0; cfg.beta_end = 8;
    cfg.rounds_per_step = SWEEPS; cfg.init_random = 1;
    mdl.b = b8 / 8.0; mdl.beta0 = 1.0; mdl.beta_step = 0; mdl.beta_end = 1.0;
    mdl.rps = SWEEPS; mdl.max_rounds = 0; mdl.target_en = 0; mdl.target = 0;
    mdl.init_random = 1; mdl.seed = seed;
    foreach (hist[k]) hist[k] = 0;
    stay = 0;
    sampling = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    mdl.run();
    wait (done);
    @(negedge clk);
    sampling = 0;
    for (int i = 0; i < N; i++) chk("spin", spins[i] ? 1 : -1, mdl.m[i]);
    chk("samples", samples, mdl.samples);
    chk("rounds", rounds, SWEEPS);
    chk("best energy", best_energy, mdl.best_e);
    chk("energy", energy, mdl.e);
    begin
      int tot = 0;
      foreach (hist[k]) tot += hist[k];
      chk("sweeps sampled", tot, SWEEPS);
    end
    p_stay = real'(stay) / (SWEEPS - 1);
    p_ground = real'(hist[3]) / SWEEPS;
    $display("B = %5.2f: stay %0.3f, ground %0.3f, sweeps per state 0..7: %0d %0d %0d %0d %0d %0d %0d %0d",
             b8 / 8.0, p_stay, p_ground, hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
  endtask

  initial begin
    int jv [3][3] = '{'{0, 1, -1}, '{1, 0, -1}, '{-1, -1, 0}};
    int hv [3] = '{0, 0, -1};
    int bs [5] = '{-16, -8, 0, 8, 16};
    real ps [5], pg [5];
    mdl = new(N, 2);
    for (int i = 0; i < N; i++) begin
      mdl.hv[i] = hv[i];
      for (int j = 0; j < N; j++) mdl.jm[i * N + j] = jv[i][j];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        j_we = 1; j_row = i[$clog2(N)-1:0]; j_col = j[$clog2(N)-1:0];
        j_data = JW'(jv[i][j]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_row = i[$clog2(N)-1:0]; h_data = JW'(hv[i]);
      @(negedge clk);
      h_we = 0;
    end
    for (int k = 0; k < 5; k++) do_run(bs[k], ps[k], pg[k]);
    for (int k = 1; k < 5; k++) chk($sformatf("stay rises from B=%0d/8 to %0d/8", bs[k-1], bs[k]), ps[k] > ps[k-1], 1);
    chk("ground share lower at B=-1 than B=0", pg[1] < pg[2], 1);
    chk("ground share higher at B=+1 than B=0", pg[3] > pg[2], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
