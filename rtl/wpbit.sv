// wpbit: weighted p-bit, a tunable random number generator with its own weight memory.
//
// It joins weight_matrix (I = h + sum J m + hC mC, clamped and pinned) and tunable_rng
// (m = 1 with probability (tanh(I)+1)/2). An update takes two clock cycles, as in the paper:
//   cycle 1 of en: the clamped weighted sum is registered (i_q);
//   cycle 2 of en: the activation table and comparator act on i_q and the new state is
//                  loaded into m, visible after that clock edge.
// The sequencer holds en high for exactly two cycles per turn. The pipeline register between
// the halves is this design's reading of "2 clock cycles for a complete update"; the paper does
// not draw it.
//
// Ports: en (from the sequencer), sel / clamp (pinning), m_in / j (other p-bits, weights),
// h (bias), m_c / hc (coupling terminal), m (state, 1 bit). SEED must differ between p-bits.
module wpbit
  import pbit_pkg::*;
#(
  parameter int          N_IN = MAX_N - 1,
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               sel,
  input  logic               clamp,
  input  logic    [N_IN-1:0] m_in,
  input  weight_t [N_IN-1:0] j,
  input  weight_t            h,
  input  logic               m_c,
  input  weight_t            hc,
  output logic               m
);
  wsum_t sum;
  act_t  i_cl, i_q;
  logic  en_q;

  weight_matrix #(.N_IN(N_IN)) u_wm (
    .m_in(m_in), .j(j), .h(h), .m_c(m_c), .hc(hc),
    .sel(sel), .clamp(clamp), .sum(sum), .i_out(i_cl));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      i_q  <= '0;
      en_q <= 1'b0;
    end else begin
      en_q <= en;
      if (en) i_q <= i_cl;
    end
  end

  tunable_rng #(.SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .upd(en & en_q), .i_in(i_q), .m(m));
endmodule
