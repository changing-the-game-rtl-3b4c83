// bbim_top_full_tb: the machine at its default size (second order,
// N = 2000 spins, 2-bit coefficients) on three 2000-node MAX-CUT instances
// shaped like the published large benchmarks (J_ij = -w_ij, h = 0):
//   * K2000-type: the complete graph, 1,999,000 edges of weight +-1, B = -1;
//   * G22-type: 19,990 random edges of weight 1, B = -0.5;
//   * G39-type: 11,778 random edges of weight +-1, B = -1.
// The edge counts and B values of the last two follow the published ones;
// the graphs themselves are random, not the published instances, so their
// cut values are not comparable with published ones. (The published K2000
// setting B = -8 does not fit the 6-bit B format; -1 is used.) For each,
// all 4,000,000 coefficients are written through the host port, the spins
// are drawn from the PRNG, and one complete run of the annealing schedule
// (beta 0.125 to 4 in steps of 0.125, one sweep per step: 32 sweeps,
// 64,000 spin updates) is made. The result is compared bit for bit with
// the reference model, the final energy is recomputed directly, and the
// best cut value found is reported.
module bbim_top_full_tb;
  import bbim_pkg::*;
  import bbim_tb_pkg::*;
  localparam int N = 2000, JW = 2;

  logic clk = 0, rst_n = 0;
  logic j_we = 0, h_we = 0, s_we = 0, s_m = 0, seed_we = 0, start = 0;
  logic [$clog2(N)-1:0] j_row = '0, h_row = '0, s_idx = '0;
  logic [$clog2(N)-1:0] j_col = '0;
  logic [JW-1:0] j_data = '0, h_data = '0;
  logic [31:0] seed = '0;
  bbim_cfg_t cfg = '0;
  logic busy, done, hit, energy_valid;
  beta_t beta;
  bb_t bb;
  count_t rounds, samples, hit_sample;
  logic [N-1:0] spins, best_state;
  energy_t energy, best_energy;

  bbim_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bbim_model mdl;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (16000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // load mdl.jm (and h = 0) into the machine through the host port
  task automatic load();
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        j_we = 1; j_row = i[$clog2(N)-1:0]; j_col = j[$clog2(N)-1:0];
        j_data = JW'(mdl.jm[i * N + j]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_row = i[$clog2(N)-1:0]; h_data = '0;
    end
    @(negedge clk);
    h_we = 0;
  endtask

  // random graph with the given number of edges; weights 1, or +-1
  task automatic make_sparse(int edges, bit signed_w);
    int i, j, placed;
    for (int q = 0; q < N * N; q++) mdl.jm[q] = 0;
    placed = 0;
    while (placed < edges) begin
      i = $urandom % N;
      j = $urandom % N;
      if (i != j && mdl.jm[i * N + j] == 0) begin
        mdl.jm[i * N + j] = (signed_w && ($urandom % 2)) ? 1 : -1;
        mdl.jm[j * N + i] = mdl.jm[i * N + j];
        placed++;
      end
    end
  endtask

  task automatic run_check(string name, int b8, logic [31:0] sd);
    longint wsum, e_direct;
    seed_we = 1; seed = sd;
    @(negedge clk);
    seed_we = 0;
    cfg = '0;
    cfg.bb = B_W'(b8);               // B = b8 / 8
    cfg.beta0 = BETA_W'(1);          // 0.125
    cfg.beta_step = BETA_W'(1);      // 0.125
    cfg.beta_end = BETA_W'(32);      // 4.0
    cfg.rounds_per_step = 1;
    cfg.max_rounds = 0;
    cfg.init_random = 1;
    mdl.b = b8 / 8.0; mdl.beta0 = 0.125; mdl.beta_step = 0.125; mdl.beta_end = 4.0;
    mdl.rps = 1; mdl.max_rounds = 0; mdl.target_en = 0; mdl.target = 0;
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
    e_direct = mdl.energy();
    chk("energy direct", energy, e_direct);
    chk("best energy", best_energy, mdl.best_e);
    chk("hit sample", hit_sample, mdl.hit_sample);
    chk("samples", samples, 32 * N);
    chk("rounds", rounds, 32);
    chk("annealing complete", mdl.anneal_done, 1);
    chk("beta", beta, $rtoi(mdl.beta * 8));
    // cut = -E/2 + (1/4) sum_ij w_ij, w = -J
    wsum = 0;
    foreach (mdl.jm[q]) wsum -= mdl.jm[q];
    $display("%s, B = %0.3f: energy %0d, best energy %0d at sample %0d, best cut %0d, flips %0d",
             name, mdl.b, energy, best_energy, hit_sample, -best_energy / 2 + wsum / 4, mdl.flips);
    checks++;
    if (mdl.improvements == 0) begin failures++; $display("FAIL energy never improved"); end
  endtask

  initial begin
    mdl = new(N, 2);
    for (int i = 0; i < N; i++) begin
      mdl.hv[i] = 0;
      mdl.jm[i * N + i] = 0;
      for (int j = i + 1; j < N; j++) begin
        mdl.jm[i * N + j] = ($urandom % 2) ? 1 : -1;
        mdl.jm[j * N + i] = mdl.jm[i * N + j];
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load();
    run_check("K2000-type", -8, 32'h2000_0001);
    make_sparse(19990, 0);
    load();
    run_check("G22-type", -4, 32'h2000_0022);
    make_sparse(11778, 1);
    load();
    run_check("G39-type", -8, 32'h2000_0039);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
