// lfsr32_tb: checks the 32-bit XNOR LFSR against a register-by-register
// model written with the taps numbered 1..32 as in the tap table (32, 22,
// 2, 1), checks seed loading, the all-ones seed rule, hold when not
// stepping, and that the state does not repeat within 200000 steps.
module lfsr32_tb;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [31:0] seed = '0, q;
  int checks = 0, failures = 0;

  lfsr32 dut (.*);
  always #5 clk = ~clk;

  // model: r[1..32], r[1] is the first register
  bit r [1:32];
  function automatic logic [31:0] pack();
    logic [31:0] v;
    for (int n = 1; n <= 32; n++) v[n-1] = r[n];
    return v;
  endfunction
  task automatic model_step();
    bit f;
    f = !(r[32] ^ r[22] ^ r[2] ^ r[1]);
    for (int n = 32; n > 1; n--) r[n] = r[n-1];
    r[1] = f;
  endtask
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] first;
    bit repeated;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset", q, 32'h0);
    // load a seed
    seed = 32'h1234_5678; load = 1;
    @(negedge clk); load = 0;
    check("seed", q, 32'h1234_5678);
    for (int n = 1; n <= 32; n++) r[n] = seed[n-1];
    // 1000 steps against the model
    step = 1;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      model_step();
      check("step", q, pack());
    end
    // hold
    step = 0;
    first = q;
    repeat (5) @(negedge clk);
    check("hold", q, first);
    // all-ones seed is replaced by zero
    seed = '1; load = 1;
    @(negedge clk); load = 0;
    check("all-ones seed", q, 32'h0);
    // from zero: first steps shift in ones
    step = 1;
    @(negedge clk);
    check("from zero", q, 32'h1);
    // no repetition of the start state in 200000 steps, never all ones
    first = q;
    repeated = 0;
    for (int k = 0; k < 200000; k++) begin
      @(negedge clk);
      if (q == first || q == '1) repeated = 1;
    end
    checks++;
    if (repeated) begin failures++; $display("FAIL short period or lock-up"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
