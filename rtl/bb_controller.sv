// bb_controller: the Bounce-Bind controller and its multiplier (Fig. 3).
//
// Holds the Bounce-Bind parameter B in the paper's s[2][3] format and forms
// the term B*m_i that is added to the local field of the spin being updated:
// +B when m_i = +1 (bit 1), -B when m_i = -1 (bit 0). B < 0 pushes a spin
// to flip ("bounce"), B > 0 to keep its state ("bind"); B = 0 gives the
// classical Ising machine. The result is one bit wider than B so that
// -(-4.0) = +4.0 is exact; it keeps B's 3 fraction bits.
//
// Timing: `b_we` loads `b_in` at the next clock edge (the host writes B
// before a run); `bm` is combinational in `m_i` and the stored B.
module bb_controller
  import bbim_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 b_we,
  input  bb_t                  b_in,
  input  logic                 m_i,
  output bb_t                  b_q,
  output logic signed [B_W:0]  bm
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    b_q <= '0;
    else if (b_we) b_q <= b_in;
  end

  always_comb begin
    if (m_i) bm = (B_W+1)'(b_q);
    else     bm = -(B_W+1)'(b_q);
  end
endmodule
