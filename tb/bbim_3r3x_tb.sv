// bbim_3r3x_tb: second-order 3-regular 3-XORSAT workload at the smallest
// published size, n = 16 variables (32 spins: one auxiliary spin per
// clause), with 3-bit coefficients (JW = 3).
//
// Each clause m_a m_b m_c = p is encoded with the 4-spin gadget
//   G = h_s (m_a+m_b+m_c) + h_x m_x + J_s (m_a m_b+m_a m_c+m_b m_c)
//       + J_x (m_a+m_b+m_c) m_x,   (h_s, h_x, J_s, J_x) = (-1, -2, 1, 2),
// whose minimum -4 is reached exactly when m_a m_b m_c = +1 (checked here by
// enumeration). Parity -1 clauses use the same gadget on (m_a, m_b, -m_c).
// The instance is planted, so the ground energy is exactly -4n = -64.
// Runs with B = -3.875 (the bounce setting the published tuning gives at
// this size), B = -1 and B = 0 follow the published schedule (30 sweeps per beta,
// 960 sweeps) with early stop at -64; each run is matched bit for bit with the reference model, and the
// number of runs that reach the ground state is reported per B.
module bbim_3r3x_tb;
  import bbim_pkg::*;
  import bbim_tb_pkg::*;
  localparam int NV = 16, N = 2 * NV, JW = 3;

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

  // gadget check by enumeration, in the E = -sum J m m - sum h m convention
  function automatic int gadget_min(int ma, int mb, int mc);
    int g, best = 1000;
    for (int mx = -1; mx <= 1; mx += 2) begin
      g = -1 * (ma + mb + mc) - 2 * mx + (ma * mb + ma * mc + mb * mc) + 2 * (ma + mb + mc) * mx;
      if (g < best) best = g;
    end
    return best;
  endfunction

  // add J to the symmetric matrix
  function automatic void addj(int a, int b, int v);
    mdl.jm[a * N + b] += v;
    mdl.jm[b * N + a] += v;
  endfunction

  task automatic make_instance();
    int slots [3*NV];
    int planted [N];
    int v [3];
    int sg [3];
    int t, tmp, par;
    bit ok;
    for (int a = -1; a <= 1; a += 2)
      for (int b = -1; b <= 1; b += 2)
        for (int c = -1; c <= 1; c += 2)
          chk("gadget", gadget_min(a, b, c), (a * b * c == 1) ? -4 : -2);
    do begin
      for (int s = 0; s < 3 * NV; s++) slots[s] = s / 3;
      for (int s = 3 * NV - 1; s > 0; s--) begin
        t = $urandom % (s + 1); tmp = slots[s]; slots[s] = slots[t]; slots[t] = tmp;
      end
      ok = 1;
      for (int cl = 0; cl < NV; cl++)
        if (slots[3*cl] == slots[3*cl+1] || slots[3*cl+1] == slots[3*cl+2] || slots[3*cl] == slots[3*cl+2]) ok = 0;
    end while (!ok);
    foreach (mdl.jm[q]) mdl.jm[q] = 0;
    foreach (mdl.hv[q]) mdl.hv[q] = 0;
    for (int q = 0; q < NV; q++) planted[q] = ($urandom % 2) ? 1 : -1;
    for (int cl = 0; cl < NV; cl++) begin
      for (int q = 0; q < 3; q++) v[q] = slots[3*cl+q];
      par = planted[v[0]] * planted[v[1]] * planted[v[2]];
      sg[0] = 1; sg[1] = 1; sg[2] = par;           // gauge for parity -1
      // E-convention coefficients: h = -g_h, J = -g_J of the gadget G
      for (int q = 0; q < 3; q++) mdl.hv[v[q]] += 1 * sg[q];
      mdl.hv[NV + cl] += 2;
      for (int q = 0; q < 3; q++)
        for (int r = q + 1; r < 3; r++) addj(v[q], v[r], -1 * sg[q] * sg[r]);
      for (int q = 0; q < 3; q++) addj(v[q], NV + cl, -2 * sg[q]);
      // planted auxiliary spin: the minimising value for this clause
      planted[NV + cl] = (-2 + 2 * (sg[0] * planted[v[0]] + sg[1] * planted[v[1]] + sg[2] * planted[v[2]])) < 0 ? 1 : -1;
    end
    for (int q = 0; q < N; q++) mdl.m[q] = planted[q];
    chk("planted ground energy", mdl.energy(), -4 * NV);
    for (int i = 0; i < N; i++) begin
      chk("h fits 3 bits", mdl.hv[i] >= -4 && mdl.hv[i] <= 3, 1);
      for (int j = 0; j < N; j++) begin
        chk("J fits 3 bits", mdl.jm[i * N + j] >= -4 && mdl.jm[i * N + j] <= 3, 1);
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

  task automatic do_run(real b, logic [31:0] sd, output bit success);
    seed_we = 1; seed = sd;
    @(negedge clk);
    seed_we = 0;
    cfg = '0;
    cfg.bb = B_W'($rtoi(b * 8)); cfg.beta0 = 1; cfg.beta_step = 1; cfg.beta_end = 32;
    cfg.rounds_per_step = 30; cfg.target_en = 1; cfg.target_energy = -4 * NV;
    cfg.init_random = 1;
    mdl.b = b; mdl.beta0 = 0.125; mdl.beta_step = 0.125; mdl.beta_end = 4.0;
    mdl.rps = 30; mdl.max_rounds = 0; mdl.target_en = 1; mdl.target = -4 * NV;
    mdl.init_random = 1; mdl.seed = sd;
    start = 1;
    @(negedge clk);
    start = 0;
    mdl.run();
    wait (done);
    @(negedge clk);
    for (int i = 0; i < N; i++) chk("spin", spins[i] ? 1 : -1, mdl.m[i]);
    chk("energy", energy, mdl.e);
    chk("energy direct", energy, mdl.energy());
    chk("best energy", best_energy, mdl.best_e);
    chk("hit sample", hit_sample, mdl.hit_sample);
    chk("samples", samples, mdl.samples);
    chk("hit", hit, mdl.hit);
    chk("not below ground", best_energy >= -4 * NV, 1);
    success = hit;
    $display("B=%f seed %h: best energy %0d after %0d samples, flips %0d of %0d", b, sd, best_energy, hit_sample, mdl.flips, mdl.samples);
  endtask

  initial begin
    int succ_bounce = 0, succ_mid = 0, succ_classic = 0;
    bit s;
    mdl = new(N, 2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_instance();
    for (int r = 0; r < 6; r++) begin
      do_run(-3.875, 32'h3000_0000 + r, s); succ_bounce += s;
      do_run(-1.0,   32'h3000_0000 + r, s); succ_mid += s;
      do_run(0.0,    32'h3000_0000 + r, s); succ_classic += s;
    end
    $display("3R3X n=%0d: ground reached in %0d/6 runs with B=-3.875, %0d/6 with B=-1, %0d/6 with B=0",
             NV, succ_bounce, succ_mid, succ_classic);
    checks++;
    if (succ_bounce + succ_mid + succ_classic == 0) begin failures++; $display("FAIL ground never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
