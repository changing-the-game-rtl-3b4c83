// bbim_3r3x3_tb: third-order 3R3X workload at the largest published size,
// n = 56 variables (ORDER = 3, N = 56, 1540 pair entries per row). The
// instance is a planted 3-regular 3-XORSAT instance: every variable is in
// exactly 3 clauses, there are n clauses, no clause repeats, and each
// clause (a,b,c) gets J = m_a m_b m_c of a hidden random assignment, so the
// ground energy is exactly -n. Runs follow the annealing schedule 0.125 to
// 4 in steps of 0.125 with 94 sweeps per step (3008 sweeps, about the
// largest round count plotted), start from random spins and stop early at
// the ground energy. Four runs each are made with B = -0.625 (near the
// optimum plotted for this size) and B = 0 (the classical machine). Every
// run is matched bit for bit with the reference model, and the best energy
// of each run and the number reaching the ground state are reported.
module bbim_3r3x3_tb;
  import bbim_pkg::*;
  import bbim_tb_pkg::*;
  localparam int N = 56, JW = 2, P = N * (N - 1) / 2;

  logic clk = 0, rst_n = 0;
  logic j_we = 0, h_we = 0, s_we = 0, s_m = 0, seed_we = 0, start = 0;
  logic [$clog2(N)-1:0] j_row = '0, h_row = '0, s_idx = '0;
  logic [$clog2(P)-1:0] j_col = '0;
  logic [JW-1:0] j_data = '0, h_data = '0;
  logic [31:0] seed = '0;
  bbim_cfg_t cfg = '0;
  logic busy, done, hit, energy_valid;
  beta_t beta;
  bb_t bb;
  count_t rounds, samples, hit_sample;
  logic [N-1:0] spins, best_state;
  energy_t energy, best_energy;

  bbim_top #(.ORDER(3), .N(N), .JW(JW)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_hit = 0, n_limit = 0, n_bounce = 0, n_bind = 0;
  bbim_model mdl;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pidx(int j, int k);  // j < k
    return j * N - j * (j + 1) / 2 + (k - j - 1);
  endfunction

  task automatic make_instance();
    int slots [3*N];
    int planted [N];
    int a, b, c, t, tmp, jc;
    bit ok;
    do begin
      for (int s = 0; s < 3 * N; s++) slots[s] = s / 3;
      for (int s = 3 * N - 1; s > 0; s--) begin
        t = $urandom % (s + 1); tmp = slots[s]; slots[s] = slots[t]; slots[t] = tmp;
      end
      ok = 1;
      for (int cl = 0; cl < N; cl++) begin
        a = slots[3*cl]; b = slots[3*cl+1]; c = slots[3*cl+2];
        if (a == b || b == c || a == c) ok = 0;
        for (int c2 = 0; c2 < cl; c2++)
          if ((slots[3*c2] + 1) * (slots[3*c2+1] + 1) * (slots[3*c2+2] + 1) == (a + 1) * (b + 1) * (c + 1)
              && slots[3*c2] + slots[3*c2+1] + slots[3*c2+2] == a + b + c) ok = 0;
      end
    end while (!ok);
    foreach (mdl.jm[q]) mdl.jm[q] = 0;
    foreach (mdl.hv[q]) mdl.hv[q] = 0;
    for (int v = 0; v < N; v++) planted[v] = ($urandom % 2) ? 1 : -1;
    for (int cl = 0; cl < N; cl++) begin
      a = slots[3*cl]; b = slots[3*cl+1]; c = slots[3*cl+2];
      // sort
      if (a > b) begin tmp = a; a = b; b = tmp; end
      if (b > c) begin tmp = b; b = c; c = tmp; end
      if (a > b) begin tmp = a; a = b; b = tmp; end
      jc = planted[a] * planted[b] * planted[c];
      mdl.jm[a * P + pidx(b, c)] += jc;
      mdl.jm[b * P + pidx(a, c)] += jc;
      mdl.jm[c * P + pidx(a, b)] += jc;
    end
    for (int i = 0; i < N; i++) begin
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        j_we = 1; j_row = i[$clog2(N)-1:0]; j_col = p[$clog2(P)-1:0];
        j_data = JW'(mdl.jm[i * P + p]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_row = i[$clog2(N)-1:0]; h_data = '0;
      @(negedge clk);
      h_we = 0;
    end
    for (int v = 0; v < N; v++) mdl.m[v] = planted[v];
    chk("planted energy", mdl.energy(), -N);
  endtask

  task automatic do_run(real b, real b0, real bs, real be, int rps, int mr,
                        bit ten, bit rinit, logic [31:0] sd);
    logic [N-1:0] init_s;
    init_s = N'($urandom);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      s_we = 1; s_idx = i[$clog2(N)-1:0]; s_m = init_s[i];
      mdl.m[i] = init_s[i] ? 1 : -1;
    end
    @(negedge clk);
    s_we = 0; seed_we = 1; seed = sd;
    @(negedge clk);
    seed_we = 0;
    cfg = '0;
    cfg.bb = B_W'($rtoi(b * 8)); cfg.beta0 = BETA_W'($rtoi(b0 * 8));
    cfg.beta_step = BETA_W'($rtoi(bs * 8)); cfg.beta_end = BETA_W'($rtoi(be * 8));
    cfg.rounds_per_step = rps; cfg.max_rounds = mr; cfg.target_en = ten;
    cfg.target_energy = -N; cfg.init_random = rinit;
    mdl.b = b; mdl.beta0 = b0; mdl.beta_step = bs; mdl.beta_end = be;
    mdl.rps = rps; mdl.max_rounds = mr; mdl.target_en = ten; mdl.target = -N;
    mdl.init_random = rinit; mdl.seed = sd;
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
    chk("energy direct", energy, mdl.energy());
    chk("best energy", best_energy, mdl.best_e);
    chk("best >= ground", best_energy >= -N, 1);
    chk("hit sample", hit_sample, mdl.hit_sample);
    chk("samples", samples, mdl.samples);
    chk("rounds", rounds, mdl.rounds);
    chk("hit", hit, mdl.hit);
    if (mdl.hit) n_hit++; else n_limit++;
    if (b < 0) n_bounce++;
    if (b > 0) n_bind++;
  endtask

  initial begin
    int sb = 0, sc = 0;
    mdl = new(N, 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_instance();
    for (int r = 0; r < 4; r++) begin
      do_run(-0.625, 0.125, 0.125, 4.0, 94, 0, 1, 1, 32'h5600_0000 + r);
      sb += mdl.hit;
      $display("B = -0.625 seed %0d: best energy %0d of ground %0d, flips %0d", r, mdl.best_e, -N, mdl.flips);
      do_run(0.0, 0.125, 0.125, 4.0, 94, 0, 1, 1, 32'h5600_0000 + r);
      sc += mdl.hit;
      $display("B =  0     seed %0d: best energy %0d of ground %0d, flips %0d", r, mdl.best_e, -N, mdl.flips);
    end
    $display("third-order 3R3X n=%0d: ground reached in %0d/4 runs with B=-0.625, %0d/4 with B=0", N, sb, sc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
