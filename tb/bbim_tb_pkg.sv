// bbim_tb_pkg: reference model of the Bounce-Bind Ising machine for the
// end-to-end testbenches.
//
// The model is written from the machine's specification, not from its RTL:
// integer spins +-1, the local field I_i and I_BB,i = I_i + B m_i as real
// numbers, tanh from exp, the 32-bit XNOR LFSR with taps 32,22,2,1, and the
// documented timing of the machine's random stream: the PRNG steps once in
// every busy clock cycle, a spin update takes 3 cycles, the energy pass 3N,
// random initialisation one cycle per 32 spins. With that the model
// predicts every spin value, so a run of the RTL and of the model must
// agree bit for bit.
package bbim_tb_pkg;

  function automatic logic [31:0] lfsr_next(logic [31:0] q);
    return {q[30:0], ~(q[31] ^ q[21] ^ q[1] ^ q[0])};
  endfunction

  // signed Q1.16 tanh with the specified table resolution
  function automatic int tanh_ref(real x);
    real ax, e, v;
    int k;
    ax = x < 0 ? -x : x;
    k = $rtoi(ax * 16.0);
    if (k > 127) k = 127;
    e = $exp(2.0 * k / 16.0);
    v = (e - 1.0) / (e + 1.0) * 65536.0;
    if (v > 65535.0) v = 65535.0;
    return x < 0 ? -$rtoi(v) : $rtoi(v);
  endfunction

  class bbim_model;
    int n, order, np;
    int jm[];          // order 2: n*n (row i, column j); order 3: n*np, pairs j<k
    int hv[];
    int m[];           // +-1
    // configuration
    real b, beta0, beta_step, beta_end;
    int rps, max_rounds;
    bit target_en, init_random;
    longint target;
    logic [31:0] seed;
    // results
    int best_m[];
    longint e, best_e;
    int hit_sample, samples, rounds, flips, improvements;
    real beta;
    bit hit, anneal_done;

    function new(int n_, int order_);
      n = n_; order = order_;
      np = order == 3 ? n * (n - 1) / 2 : n;
      jm = new[n * np];
      hv = new[n];
      m = new[n];
      best_m = new[n];
    endfunction

    function int coup(int i);
      int c = 0, p = 0;
      if (order == 2) begin
        for (int j = 0; j < n; j++) if (j != i) c += jm[i * np + j] * m[j];
      end else begin
        for (int j = 0; j < n; j++)
          for (int k = j + 1; k < n; k++) begin
            if (j != i && k != i) c += jm[i * np + p] * m[j] * m[k];
            p++;
          end
      end
      return c;
    endfunction

    // direct energy of the current spins (third order: J(3)_ijk taken from
    // row i of the smallest index i of the triple)
    function longint energy();
      longint s = 0;
      int p;
      for (int i = 0; i < n; i++) begin
        s -= hv[i] * m[i];
        if (order == 2) begin
          for (int j = i + 1; j < n; j++) s -= jm[i * np + j] * m[i] * m[j];
        end else begin
          p = 0;
          for (int j = 0; j < n; j++)
            for (int k = j + 1; k < n; k++) begin
              if (j > i) s -= jm[i * np + p] * m[i] * m[j] * m[k];
              p++;
            end
        end
      end
      return s;
    endfunction

    function void run();
      logic [31:0] q;
      int words, cnt, i, mold, mnew, t;
      longint steps, target_step;
      real ibb, x;
      q = (&seed) ? 32'd0 : seed;
      steps = 0;
      words = init_random ? (n + 31) / 32 : 0;
      // PREP cycle
      q = lfsr_next(q); steps++;
      for (int w = 0; w < words; w++) begin
        for (int bt = 0; bt < 32; bt++) if (w * 32 + bt < n) m[w * 32 + bt] = q[bt] ? 1 : -1;
        q = lfsr_next(q); steps++;
      end
      e = energy();
      best_e = e;
      foreach (m[k]) best_m[k] = m[k];
      hit_sample = 0; samples = 0; rounds = 0; flips = 0; improvements = 0;
      beta = beta0; cnt = 0; anneal_done = 0;
      i = 0;
      forever begin
        hit = target_en && (e <= target);
        if (hit || anneal_done || (max_rounds != 0 && rounds >= max_rounds)) break;
        // random number used by update `samples`
        target_step = 1 + words + 3 * n + 1 + 3 * longint'(samples) + 2;
        while (steps < target_step) begin q = lfsr_next(q); steps++; end
        t = tanh_ref(beta * (real'(coup(i) + hv[i]) + b * m[i]));
        mold = m[i];
        mnew = (t > int'($signed(q[16:0]))) ? 1 : -1;
        if (mnew != mold) begin
          e += 2 * mold * (coup(i) + hv[i]);
          flips++;
        end
        m[i] = mnew;
        samples++;
        if (e < best_e) begin
          best_e = e; hit_sample = samples; improvements++;
          foreach (m[k]) best_m[k] = m[k];
        end
        i++;
        if (i == n) begin
          i = 0; rounds++;
          if (cnt == (rps == 0 ? 0 : rps - 1)) begin
            cnt = 0;
            if (beta >= beta_end) anneal_done = 1;
            else if (beta + beta_step >= beta_end) beta = beta_end;
            else beta = beta + beta_step;
          end else cnt++;
        end
      end
    endfunction
  endclass

endpackage
