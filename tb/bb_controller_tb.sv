// bb_controller_tb: loads every s[2][3] value of B and checks that the
// Bounce-Bind term equals +B for m_i = +1 and -B for m_i = -1 (as real
// numbers, 1/8 units), and that B holds while b_we is low.
module bb_controller_tb;
  import bbim_pkg::*;
  logic clk = 0, rst_n = 0, b_we = 0, m_i = 0;
  bb_t b_in = '0, b_q;
  logic signed [B_W:0] bm;
  int checks = 0, failures = 0;

  bb_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real bval, got;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = -32; v < 32; v++) begin
      @(negedge clk);
      b_in = B_W'(v); b_we = 1;
      @(negedge clk);
      b_we = 0; b_in = '0;
      bval = v / 8.0;
      for (int s = 0; s < 2; s++) begin
        m_i = s[0];
        #1;
        got = real'(bm) / 8.0;
        checks++;
        if (got != (s ? bval : -bval)) begin
          failures++;
          $display("FAIL B=%f m=%0d: term %f", bval, s, got);
        end
      end
      checks++;
      if (b_q !== B_W'(v)) begin failures++; $display("FAIL hold B=%f", bval); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
