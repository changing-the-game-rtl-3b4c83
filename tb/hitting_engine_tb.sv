// hitting_engine_tb: second-order problem with N = 8 random couplings in
// {-2..1} and fields. The testbench performs the energy pass, then 3000
// random single-spin updates, and after each compares the tracked energy
// with E computed directly from the spin vector, and the best energy, best
// state and hitting sample with its own record. The target flag is checked
// against E <= target for a target chosen among the reached energies.
module hitting_engine_tb;
  import bbim_pkg::*;
  localparam int N = 8, JW = 2, SW = 8;
  logic clk = 0, rst_n = 0;
  logic clear = 0, acc_en = 0, acc_m = 0, init_done = 0, upd_en = 0;
  logic upd_m_old = 0, upd_m_new = 0, target_en = 0;
  logic signed [SW-1:0] acc_coup = '0, upd_field = '0;
  logic [JW-1:0] acc_h = '0;
  logic [N-1:0] m_vec = '0, m_next_vec = '0, best_state;
  count_t sample = '0, hit_sample;
  energy_t target_energy = '0, energy, best_energy;
  logic valid, hit;
  int checks = 0, failures = 0;

  hitting_engine #(.N(N), .JW(JW), .SW(SW), .ORDER(2)) dut (.*);
  always #5 clk = ~clk;

  int J [N][N];
  int H [N];
  logic [N-1:0] s;

  function automatic int spin(logic b); return b ? 1 : -1; endfunction
  function automatic int coupling(int i, logic [N-1:0] v);
    int c = 0;
    for (int j = 0; j < N; j++) if (j != i) c += J[i][j] * spin(v[j]);
    return c;
  endfunction
  function automatic int e_direct(logic [N-1:0] v);
    int e = 0;
    for (int i = 0; i < N; i++) begin
      for (int j = i + 1; j < N; j++) e -= J[i][j] * spin(v[i]) * spin(v[j]);
      e -= H[i] * spin(v[i]);
    end
    return e;
  endfunction
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best, best_at, i, e;
    logic [N-1:0] best_s;
    for (int a = 0; a < N; a++) begin
      H[a] = int'($urandom % 4) - 2;
      J[a][a] = 0;
      for (int b = a + 1; b < N; b++) begin
        J[a][b] = int'($urandom % 4) - 2;
        J[b][a] = J[a][b];
      end
    end
    s = N'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int a = 0; a < N; a++) begin
        acc_en = 1; acc_m = s[a]; acc_coup = SW'(coupling(a, s)); acc_h = JW'(H[a]);
        @(negedge clk);
      end
      acc_en = 0;
      init_done = 1; m_vec = s;
      @(negedge clk);
      init_done = 0;
      best = e_direct(s); best_s = s; best_at = 0;
      chk("initial energy", energy, best);
      chk("initial valid", valid, 1);
      for (int t = 1; t <= 1500; t++) begin
        i = $urandom % N;
        upd_en = 1; upd_m_old = s[i]; upd_m_new = $urandom;
        upd_field = SW'(coupling(i, s) + H[i]);
        m_next_vec = s; m_next_vec[i] = upd_m_new;
        sample = t;
        @(negedge clk);
        upd_en = 0;
        s = m_next_vec;
        e = e_direct(s);
        if (e < best) begin best = e; best_s = s; best_at = t; end
        chk("energy", energy, e);
        chk("best energy", best_energy, best);
        chk("best state", best_state, best_s);
        chk("hit sample", hit_sample, best_at);
        target_en = pass[0]; target_energy = best + 1;
        #1;
        chk("hit flag", hit, pass[0] && (e <= best + 1));
        target_en = 0;
      end
      s = N'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
