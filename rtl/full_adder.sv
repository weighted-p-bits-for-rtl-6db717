// full_adder: invertible full adder, a system tile of five weighted p-bits.
//
// The p-bits are the adder's terminals, in update order Cin, B, A, S, Cout (indices given by
// pbit_pkg::FA_*). Their coupling is the 5 x 5 bipolar matrix of the paper, with zero bipolar
// bias (the adder's truth table is symmetric under inverting every bit, so no bias is needed),
// converted to the binary basis and scaled by I0 (I0_Q quarters, 4 = 1.0). Left floating, the
// tile visits the eight rows of the full-adder truth table far more often than other states;
// pinning any terminals with sel / clamp makes the rest settle to consistent values, in either
// direction (A, B, Cin -> S, Cout for addition, or S, Cout -> inputs for inversion).
// One complete update takes 5 x 3 = 15 clock cycles.
//
// Ports: sel, clamp, m_c, m are indexed by terminal; m_c (weight HC per terminal, zero by
// default) lets another tile drive a terminal softly instead of pinning it.
module full_adder
  import pbit_pkg::*;
#(
  parameter int          I0_Q      = 4,
  parameter wvec_t       HC        = '0,
  parameter logic [31:0] SEED_BASE = 32'h0F00_D5EE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [FA_N-1:0]  sel,
  input  logic [FA_N-1:0]  clamp,
  input  logic [FA_N-1:0]  m_c,
  output logic [FA_N-1:0]  m,
  output logic             sweep
);
  localparam wmat_t J = bin_j(J_FA_BIP, I0_Q);
  localparam wvec_t H = bin_h(J_FA_BIP, H_FA_BIP, I0_Q);
  logic [FA_N-1:0] en;

  system_tile #(.N(FA_N), .J(J), .H(H), .HC(HC), .SEED_BASE(SEED_BASE)) u_tile (
    .clk(clk), .rst_n(rst_n), .sel(sel), .clamp(clamp), .m_c(m_c),
    .m(m), .en(en), .sweep(sweep));
endmodule
