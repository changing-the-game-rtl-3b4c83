// bbim_sequencer_tb: runs the controller with N = 5 and checks, cycle by
// cycle, the order of its commands: random initialisation words, an energy
// pass over spins 0..N-1 (read, sum, accumulate), one init_done, then
// updates of spins 0..N-1 in order with read, sum and update on successive
// cycles (3 cycles per spin), round_done on every last spin, the sample and
// round counters, and the total run length. The three stop causes
// (max_rounds, anneal_done, hit) are exercised in turn.
module bbim_sequencer_tb;
  import bbim_pkg::*;
  localparam int N = 5;
  localparam int WI = $clog2((N + 63) / 32);
  logic clk = 0, rst_n = 0, start = 0, init_random = 0, hit = 0, anneal_done = 0;
  count_t max_rounds = '0, rounds, samples;
  logic busy, done, rd_en, sum_en, acc_en, init_done, upd_en, word_we;
  logic hit_clear, anneal_start, round_done;
  logic [$clog2(N)-1:0] idx;
  logic [WI-1:0] word_idx;
  int checks = 0, failures = 0;

  bbim_sequencer #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stop_mode 0: max_rounds, 1: anneal_done after `when` rounds, 2: hit after `when` updates
  task automatic run(bit rnd_init, int mr, int stop_mode, int when);
    int cycles, words, accs, inits, upds, rdone, exp_idx, phase, exp_upds;
    init_random = rnd_init; max_rounds = stop_mode == 0 ? mr : 0;
    hit = 0; anneal_done = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1; words = 0; accs = 0; inits = 0; upds = 0; rdone = 0;
    exp_idx = 0; phase = 0;
    chk("busy after start", busy, 1);
    chk("prep", hit_clear && anneal_start, 1);
    while (busy && cycles < 5000) begin
      if (word_we) words++;
      if (acc_en) begin chk("acc idx", idx, accs); accs++; end
      if (init_done) begin inits++; chk("init after pass", accs, N); end
      if (rd_en && inits == 1) begin
        chk("read idx", idx, exp_idx);
        chk("phase", phase, 0);
        phase = 1;
      end else if (sum_en && inits == 1) begin
        chk("sum after read", phase, 1); phase = 2;
      end else if (upd_en) begin
        chk("update after sum", phase, 2); phase = 0;
        chk("update idx", idx, exp_idx);
        chk("samples", samples, upds);
        upds++;
        chk("round_done", round_done, exp_idx == N - 1);
        if (round_done) rdone++;
        exp_idx = (exp_idx + 1) % N;
      end
      if (stop_mode == 1 && rdone == when) anneal_done = 1;
      if (stop_mode == 2 && upds == when) hit = 1;
      @(negedge clk);
      cycles++;
    end
    exp_upds = stop_mode == 0 ? mr * N : stop_mode == 1 ? when * N : when;
    chk("done", done, 1);
    chk("words", words, rnd_init ? (N + 31) / 32 : 0);
    chk("init_done count", inits, 1);
    chk("updates", upds, exp_upds);
    chk("rounds", rounds, exp_upds / N);
    chk("samples end", samples, exp_upds);
    // PREP + words + 3N energy pass + EINIT + 3 per update + final stop read
    chk("run length", cycles - 1, 1 + words + 3 * N + 1 + 3 * exp_upds + 1);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 3, 0, 0);
    run(0, 2, 0, 0);
    run(0, 0, 1, 4);
    run(1, 0, 2, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
