// spin_memory: spin state register of the BBIM (Fig. 3, "Spin memory").
//
// Holds the N spins m_1..m_N, bit i = 1 for m_i = +1 and 0 for -1, and
// presents all of them at once on `m` (the figure's spin bus m_1..m_n that
// feeds the spin unit's multiplexer). Three write paths, highest priority
// first:
//   upd_we   the spin unit writes its new value m_i(t+1) to spin upd_idx;
//   word_we  32 spins word_idx*32 .. word_idx*32+31 are overwritten at once
//            (used to draw a random initial state from the PRNG);
//   host_we  the host sets one spin (a chosen initial state).
// All writes take effect at the next clock edge. Reset clears every spin
// to -1. Ports and priorities are this design's choice.
module spin_memory #(
  parameter int N = 2000
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          upd_we,
  input  logic [$clog2(N)-1:0]          upd_idx,
  input  logic                          upd_m,
  input  logic                          word_we,
  input  logic [$clog2((N+63)/32)-1:0]  word_idx,
  input  logic [31:0]                   word_data,
  input  logic                          host_we,
  input  logic [$clog2(N)-1:0]          host_idx,
  input  logic                          host_m,
  output logic [N-1:0]                  m
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0;
    end else if (upd_we) begin
      m[upd_idx] <= upd_m;
    end else if (word_we) begin
      for (int b = 0; b < 32; b++)
        if (int'(word_idx) * 32 + b < N) m[int'(word_idx) * 32 + b] <= word_data[b];
    end else if (host_we) begin
      m[host_idx] <= host_m;
    end
  end
endmodule
