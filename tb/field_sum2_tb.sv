// field_sum2_tb: random J rows (with a non-zero diagonal that must be
// ignored), h, spins and B for N = 10 and 3-bit coefficients; the reference
// computes I_i = sum_{j!=i} J_ij m_j + h_i and I_i + B m_i with integer and
// real arithmetic on +-1 spins. Results are checked one clock after `en`.
module field_sum2_tb;
  import bbim_pkg::*;
  localparam int N = 10, JW = 3;
  localparam int SW = $clog2(N * (1 << (JW - 1)) + (1 << JW)) + 2;
  logic clk = 0, en = 0;
  logic [$clog2(N)-1:0] idx = '0;
  logic [N*JW-1:0] jrow = '0;
  logic [JW-1:0] h = '0;
  logic [N-1:0] m = '0;
  logic signed [B_W:0] bm = '0;
  logic signed [SW-1:0] coup, field;
  logic signed [SW+B_FRAC:0] field_bb;
  int checks = 0, failures = 0;

  field_sum2 #(.N(N), .JW(JW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int jv, hv, si, sj, c_ref, i;
    real b, f_ref;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      i = $urandom % N;
      idx = $clog2(N)'(i);
      jrow = '0;
      for (int j = 0; j < N; j++) jrow[j*JW +: JW] = JW'($urandom);
      h = JW'($urandom);
      m = N'({$urandom, $urandom});
      jv = $urandom % 64; b = (jv - 32) / 8.0;
      si = m[i] ? 1 : -1;
      bm = (B_W+1)'($rtoi(b * si * 8.0));
      c_ref = 0;
      for (int j = 0; j < N; j++) if (j != i) begin
        jv = int'($signed(jrow[j*JW +: JW]));
        sj = m[j] ? 1 : -1;
        c_ref += jv * sj;
      end
      hv = int'($signed(h));
      f_ref = real'(c_ref + hv) + b * si;
      en = 1;
      @(negedge clk);
      en = 0;
      checks += 3;
      if (int'(coup) != c_ref) begin failures++; $display("FAIL coup %0d vs %0d", coup, c_ref); end
      if (int'(field) != c_ref + hv) begin failures++; $display("FAIL field"); end
      if (real'(field_bb) / 8.0 != f_ref) begin failures++; $display("FAIL field_bb %f vs %f", real'(field_bb)/8.0, f_ref); end
      // registered: holds when en is low
      @(negedge clk);
      checks++;
      if (int'(coup) != c_ref) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
