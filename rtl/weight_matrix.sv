// weight_matrix: the deterministic half of a weighted p-bit, I_i = h_i + sum_j J_ij m_j + hC mC.
//
// Each p-bit keeps its own row of the coupling matrix J, its bias h and the coupling hC of the
// extra terminal mC (used to join tiles). Because the states are binary (0/1) each product
// J_ij m_j is either J_ij or 0, so the "multipliers" are AND gates and the Sum block is an adder
// tree of N_IN + 2 terms, carried on 12 bits as in the paper (wide enough that 17 terms of s[4][2]
// cannot overflow). The sum then goes through threshold_mux, which clamps it to the activation
// range -8.00 .. 7.75 and applies the Select / Clamp pinning.
//
// The inverse pseudo-temperature I0 is not a separate multiplier here: it is folded into the
// stored J, h and hC values when a problem is mapped (see pbit_pkg::bin_j / bin_h), since the
// paper's block diagram draws no multiplier for it. Purely combinational.
//
// Ports: m_in / j are the other p-bits' states and their weights, m_c / hc the tile-coupling
// terminal, h the bias, sel / clamp the pinning controls, sum the raw 12-bit sum, i_out the
// 6-bit input for the activation table.
module weight_matrix
  import pbit_pkg::*;
#(
  parameter int N_IN = MAX_N - 1
) (
  input  logic    [N_IN-1:0] m_in,
  input  weight_t [N_IN-1:0] j,
  input  weight_t            h,
  input  logic               m_c,
  input  weight_t            hc,
  input  logic               sel,
  input  logic               clamp,
  output wsum_t              sum,
  output act_t               i_out
);
  always_comb begin
    sum = wsum_t'(h);
    for (int k = 0; k < N_IN; k++)
      if (m_in[k]) sum += wsum_t'(j[k]);
    if (m_c) sum += wsum_t'(hc);
  end

  threshold_mux u_thr (.i_in(sum), .sel(sel), .clamp(clamp), .i_out(i_out));

  // The 12-bit sum must hold N_IN + 2 weights of the widest magnitude.
  initial assert ((N_IN + 2) * (2 ** (WW - 1)) <= 2 ** (SW - 1))
    else $error("weight_matrix: N_IN too large for a %0d-bit sum", SW);
endmodule
