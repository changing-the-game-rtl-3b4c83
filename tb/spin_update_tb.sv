// spin_update_tb: drives random local fields, inverse temperatures and
// random numbers and compares m_next with sign[tanh(beta*I) - r] computed
// with real arithmetic (tanh from exp, taken at |beta*I| truncated to 1/16
// and saturated at 8, as specified for the table). A second part sweeps r
// over its whole range for a few fixed fields and checks that the share of
// +1 results equals (1 + tanh)/2 to within 1e-4.
module spin_update_tb;
  import bbim_pkg::*;
  localparam int FBW = 14;
  logic signed [FBW-1:0] field_bb = '0;
  beta_t beta = '0;
  logic signed [RAND_W-1:0] rnd = '0;
  logic signed [RAND_W:0] tanh_s;
  logic m_next;
  int checks = 0, failures = 0;

  spin_update #(.FBW(FBW)) dut (.*);

  function automatic int ref_t(real x);
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

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, p_ref, p_got;
    int t, ones;
    int fields [4] = '{0, 3, -5, 12};
    for (int n = 0; n < 20000; n++) begin
      t = $urandom % 400; field_bb = FBW'(t - 200);
      beta = BETA_W'($urandom % 40);
      rnd = RAND_W'($urandom);
      #1;
      x = (real'(field_bb) / 8.0) * (real'(beta) / 8.0);
      t = ref_t(x);
      checks += 2;
      if (int'(tanh_s) != t) begin failures++; if (failures < 10) $display("FAIL tanh x=%f got %0d exp %0d", x, tanh_s, t); end
      if (m_next != (t > int'(rnd))) begin failures++; $display("FAIL compare"); end
      #1;
    end
    // probability of +1 over all random numbers
    beta = BETA_W'(8);  // 1.0
    foreach (fields[f]) begin
      field_bb = FBW'(fields[f]);  // I = fields/8
      ones = 0;
      for (int r = -65536; r < 65536; r += 4) begin
        rnd = RAND_W'(r);
        #1;
        ones += m_next;
      end
      p_got = real'(ones) / 32768.0;
      x = real'(fields[f]) / 8.0;
      p_ref = 0.5 + 0.5 * real'(ref_t(x)) / 65536.0;
      checks++;
      if (p_got - p_ref > 1e-4 || p_ref - p_got > 1e-4) begin
        failures++;
        $display("FAIL P(+1) I=%f got %f expected %f", x, p_got, p_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
