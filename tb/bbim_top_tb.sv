// bbim_top_tb: end-to-end test of the second-order machine at N = 16.
//
// A random problem (J_ij in {-1,0,+1}, symmetric, h_i in {-1,0,+1}) is
// loaded through the host ports; its ground-state energy is found by brute
// force over all 2^16 states. Several runs are then made and each is
// compared bit for bit with the reference model (bbim_tb_pkg): final spins,
// energy, best energy and state, hitting sample, rounds, samples, final
// beta and the target flag; the final energy is also recomputed directly.
// Runs cover: the paper's annealing schedule (0.125 .. 4 in 0.125 steps)
// ending by itself; a sweep limit; early stop at the known ground energy;
// host-given and random initial states; Bounce (B < 0), classical (B = 0)
// and Bind (B > 0) settings. At a fixed beta = 1 the share of updates that
// flip a spin must fall as B rises from -1 through 0 to +1, the paper's
// "bounce" and "bind" behaviour; with B = -4, beta = 4 and no couplings
// every spin must flip at every update (the B -> -infinity limit).
// Each mechanism is counted and must occur at least once.
module bbim_top_tb;
  import bbim_pkg::*;
  import bbim_tb_pkg::*;
  localparam int N = 16, JW = 2;

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

  bbim_top #(.N(N), .JW(JW)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_bounce = 0, n_bind = 0, n_classic = 0, n_anneal_stop = 0, n_limit_stop = 0;
  int n_hit_stop = 0, n_rand_init = 0, n_host_init = 0, n_improve = 0, n_flip_all = 0;
  bbim_model mdl;
  longint ground;

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

  task automatic load_problem(bit zero);
    for (int i = 0; i < N; i++) begin
      mdl.hv[i] = zero ? 0 : int'($urandom % 3) - 1;
      for (int j = i; j < N; j++) begin
        mdl.jm[i * N + j] = (zero || i == j) ? 0 : int'($urandom % 3) - 1;
        mdl.jm[j * N + i] = mdl.jm[i * N + j];
      end
    end
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        j_we = 1; j_row = i[$clog2(N)-1:0]; j_col = j[$clog2(N)-1:0];
        j_data = JW'(mdl.jm[i * N + j]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_row = i[$clog2(N)-1:0]; h_data = JW'(mdl.hv[i]);
      @(negedge clk);
      h_we = 0;
    end
  endtask

  function automatic longint brute_ground();
    longint best = 64'sh7fffffffffffffff, e;
    for (int s = 0; s < (1 << N); s++) begin
      for (int i = 0; i < N; i++) mdl.m[i] = s[i] ? 1 : -1;
      e = mdl.energy();
      if (e < best) best = e;
    end
    return best;
  endfunction

  // one run; returns the share of flipping updates
  task automatic do_run(real b, real b0, real bs, real be, int rps, int mr,
                        bit ten, longint tgt, bit rinit, logic [31:0] sd,
                        output real flip_rate);
    logic [N-1:0] init_s;
    longint e_direct;
    init_s = N'($urandom);
    // host initial state (also kept when random init is chosen: overwritten)
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
    cfg.target_energy = E_W'(tgt); cfg.init_random = rinit;
    mdl.b = b; mdl.beta0 = b0; mdl.beta_step = bs; mdl.beta_end = be;
    mdl.rps = rps; mdl.max_rounds = mr; mdl.target_en = ten; mdl.target = tgt;
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
    e_direct = mdl.energy();
    chk("energy direct", energy, e_direct);
    chk("best energy", best_energy, mdl.best_e);
    chk("hit sample", hit_sample, mdl.hit_sample);
    chk("samples", samples, mdl.samples);
    chk("rounds", rounds, mdl.rounds);
    chk("beta", beta, $rtoi(mdl.beta * 8));
    chk("hit", hit, mdl.hit);
    chk("B readback", bb, B_W'($rtoi(b * 8)));
    chk("best >= ground", best_energy >= ground, 1);
    if (b < 0) n_bounce++; else if (b > 0) n_bind++; else n_classic++;
    if (mdl.hit) n_hit_stop++;
    else if (mdl.anneal_done) n_anneal_stop++;
    else n_limit_stop++;
    if (rinit) n_rand_init++; else n_host_init++;
    if (mdl.improvements > 0) n_improve++;
    flip_rate = real'(mdl.flips) / real'(mdl.samples);
  endtask

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
    else $display("mechanism %s: %0d", what, count);
  endtask

  initial begin
    real r_bounce, r_classic, r_bind, r;
    mdl = new(N, 2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_problem(0);
    ground = brute_ground();
    $display("ground energy %0d", ground);
    // paper's schedule, Bounce, ends by itself
    do_run(-1.0, 0.125, 0.125, 4.0, 2, 0, 0, 0, 0, 32'hACE1_2345, r);
    // Bind, random initial state, sweep limit
    do_run(1.0, 0.125, 0.125, 4.0, 2, 10, 0, 0, 1, 32'h0BAD_F00D, r);
    // classical, early stop at the ground energy
    do_run(0.0, 0.125, 0.125, 4.0, 20, 0, 1, ground, 1, 32'h1357_9BDF, r);
    do_run(-0.5, 0.125, 0.125, 4.0, 20, 0, 1, ground, 0, 32'h2468_ACE0, r);
    // flip rates at fixed beta = 1
    do_run(-1.0, 1.0, 0.0, 1.0, 40, 0, 0, 0, 1, 32'h5555_0001, r_bounce);
    do_run( 0.0, 1.0, 0.0, 1.0, 40, 0, 0, 0, 1, 32'h5555_0001, r_classic);
    do_run( 1.0, 1.0, 0.0, 1.0, 40, 0, 0, 0, 1, 32'h5555_0001, r_bind);
    $display("flip rate: B=-1 %f, B=0 %f, B=+1 %f", r_bounce, r_classic, r_bind);
    checks++;
    if (!(r_bounce > r_classic && r_classic > r_bind)) begin
      failures++; $display("FAIL flip rate does not fall with B");
    end
    // B -> -infinity limit: no couplings, every update flips
    load_problem(1);
    ground = -1;
    do_run(-4.0, 4.0, 0.0, 4.0, 5, 0, 0, 0, 1, 32'h7777_1111, r);
    checks++;
    if (r == 1.0) n_flip_all++;
    else begin failures++; $display("FAIL B=-4: flip rate %f", r); end
    need("bounce runs (B<0)", n_bounce);
    need("bind runs (B>0)", n_bind);
    need("classical runs (B=0)", n_classic);
    need("stop at end of annealing", n_anneal_stop);
    need("stop at sweep limit", n_limit_stop);
    need("stop at target energy", n_hit_stop);
    need("random initial state", n_rand_init);
    need("host initial state", n_host_init);
    need("best energy improved", n_improve);
    need("all spins flip at B=-4", n_flip_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
