// bbim_maxcut_tb: dense MAX-CUT workload, an Erdos-Renyi graph G(n, 1/2)
// with n = 20 unit-weight edges (J_ij = -1 on an edge, 0 otherwise, h = 0),
// inside the published range n = 10..200. The maximum cut is found by
// enumerating all 2^20 states in Gray-code order. Runs with B = -1 (near the
// published optimum for small dense graphs) and B = 0 follow the published
// annealing schedule (3 sweeps per beta, 96 sweeps) and stop early when the
// ground energy is reached. Each run is matched bit for bit with the
// reference model; the cut of the best state, counted edge by edge, must
// equal -E/2 + (edges)/2 computed from the reported best energy. The number
// of runs reaching the maximum cut is reported per B.
module bbim_maxcut_tb;
  import bbim_pkg::*;
  import bbim_tb_pkg::*;
  localparam int N = 20, JW = 2;

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

  int checks = 0, failures = 0, edges = 0;
  longint ground;
  bbim_model mdl;
  bit adj [N][N];

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // maximum cut by Gray-code enumeration; returns the minimum energy
  function automatic longint brute_ground();
    int s [N];
    longint e, best;
    int k, f;
    for (int i = 0; i < N; i++) s[i] = -1;
    e = 0;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) if (adj[i][j]) e += 1;  // -J m m = +1 per edge, all equal
    best = e;
    for (longint g = 1; g < (longint'(1) << N); g++) begin
      k = 0;
      while (((g >> k) & 1) == 0) k++;
      f = 0;
      for (int j = 0; j < N; j++) if (j != k && adj[k][j]) f += s[j];
      e += 2 * s[k] * (-f);   // flipping s[k]: dE = 2 s_k I_k, I_k = -sum_adj s_j
      s[k] = -s[k];
      if (e < best) best = e;
    end
    return best;
  endfunction

  task automatic do_run(real b, logic [31:0] sd, output bit success);
    int cut;
    seed_we = 1; seed = sd;
    @(negedge clk);
    seed_we = 0;
    cfg = '0;
    cfg.bb = B_W'($rtoi(b * 8)); cfg.beta0 = 1; cfg.beta_step = 1; cfg.beta_end = 32;
    cfg.rounds_per_step = 3; cfg.target_en = 1; cfg.target_energy = E_W'(ground);
    cfg.init_random = 1;
    mdl.b = b; mdl.beta0 = 0.125; mdl.beta_step = 0.125; mdl.beta_end = 4.0;
    mdl.rps = 3; mdl.max_rounds = 0; mdl.target_en = 1; mdl.target = ground;
    mdl.init_random = 1; mdl.seed = sd;
    start = 1;
    @(negedge clk);
    start = 0;
    mdl.run();
    wait (done);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      chk("spin", spins[i] ? 1 : -1, mdl.m[i]);
      chk("best state", best_state[i] ? 1 : -1, mdl.best_m[i]);
    end
    chk("energy", energy, mdl.e);
    chk("best energy", best_energy, mdl.best_e);
    chk("hit sample", hit_sample, mdl.hit_sample);
    chk("samples", samples, mdl.samples);
    chk("hit", hit, mdl.hit);
    cut = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if (adj[i][j] && best_state[i] != best_state[j]) cut++;
    chk("cut from energy", 2 * cut, -best_energy + edges);
    chk("not below ground", best_energy >= ground, 1);
    success = hit;
  endtask

  initial begin
    int sb = 0, sc = 0;
    bit s;
    mdl = new(N, 2);
    for (int i = 0; i < N; i++) begin
      mdl.hv[i] = 0;
      adj[i][i] = 0;
      mdl.jm[i * N + i] = 0;
      for (int j = i + 1; j < N; j++) begin
        adj[i][j] = $urandom % 2;
        adj[j][i] = adj[i][j];
        mdl.jm[i * N + j] = adj[i][j] ? -1 : 0;
        mdl.jm[j * N + i] = mdl.jm[i * N + j];
        edges += adj[i][j];
      end
    end
    ground = brute_ground();
    $display("G(%0d,1/2): %0d edges, maximum cut %0d", N, edges, (-ground + edges) / 2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        j_we = 1; j_row = i[$clog2(N)-1:0]; j_col = j[$clog2(N)-1:0];
        j_data = JW'(mdl.jm[i * N + j]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_row = i[$clog2(N)-1:0]; h_data = '0;
      @(negedge clk);
      h_we = 0;
    end
    for (int r = 0; r < 8; r++) begin
      do_run(-1.0, 32'h4000_0000 + r, s); sb += s;
      do_run( 0.0, 32'h4000_0000 + r, s); sc += s;
    end
    $display("MAX-CUT n=%0d: maximum cut reached in %0d/8 runs with B=-1, %0d/8 with B=0", N, sb, sc);
    checks++;
    if (sb + sc == 0) begin failures++; $display("FAIL maximum cut never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
