// ssp_solver: invertible three-operand adder S = A + B + C used as a Subset Sum solver.
//
// Two rows of full-adder tiles. The upper row (an NB-bit rca) forms P = A + B; the lower row (an
// (NB+1)-bit rca) forms S = P + C, with its carry-out as the top bit of S, so S has NB+2 bits
// (15-bit operands, 17-bit sum in the paper's instance). To solve a subset-sum instance the sum
// S is pinned to the target and every bit of A, B and C that no member of its set uses is pinned
// to 0 (or to 1 if every member has it), so each operand can only take values of its set.
//
// The rows are joined in one direction, from the sum towards the inputs, as in the paper: each
// S p-bit of the upper row (and its carry-out, which is P's top bit) is pinned to the current
// state of the A p-bit of the lower row at the same weight, and the lower row's A p-bits float.
// The lower row thus proposes a P consistent with the pinned S and C; the upper row is driven in
// reverse and proposes an A and B that add up to it. Within each row carries go from LSB to
// MSB. Both first carry-ins and the top bit of C are pinned to 0.
//
// Ports: *_sel / *_clamp pin the operand and sum bits; a, b, c, s are the current states.
// Sampled over time, A + B + C visits the target most often.
module ssp_solver
  import pbit_pkg::*;
#(
  parameter int NB   = 15,
  parameter int I0_Q = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NB-1:0] a_sel,
  input  logic [NB-1:0] a_clamp,
  input  logic [NB-1:0] b_sel,
  input  logic [NB-1:0] b_clamp,
  input  logic [NB-1:0] c_sel,
  input  logic [NB-1:0] c_clamp,
  input  logic [NB+1:0] s_sel,
  input  logic [NB+1:0] s_clamp,
  output logic [NB-1:0] a,
  output logic [NB-1:0] b,
  output logic [NB-1:0] c,
  output logic [NB+1:0] s,
  output logic          sweep
);
  logic [NB-1:0] p_up;     // upper-row sum bits
  logic          p_up_co;  // upper-row carry-out
  logic [NB:0]   p_lo;     // lower-row A p-bits: the partial sum as the lower row sees it
  logic [NB:0]   c_lo;
  logic          sweep_lo;

  rca #(.N(NB), .I0_Q(I0_Q), .SEED_BASE(32'h5EED_0A0B)) u_upper (
    .clk(clk), .rst_n(rst_n),
    .a_sel(a_sel), .a_clamp(a_clamp), .b_sel(b_sel), .b_clamp(b_clamp),
    .s_sel('1), .s_clamp(p_lo[NB-1:0]),
    .cin_sel(1'b1), .cin_clamp(1'b0),
    .cout_sel(1'b1), .cout_clamp(p_lo[NB]),
    .a(a), .b(b), .s(p_up), .cout(p_up_co), .sweep(sweep));

  rca #(.N(NB + 1), .I0_Q(I0_Q), .SEED_BASE(32'h5EED_0C0D)) u_lower (
    .clk(clk), .rst_n(rst_n),
    .a_sel('0), .a_clamp('0),
    .b_sel({1'b1, c_sel}), .b_clamp({1'b0, c_clamp}),
    .s_sel(s_sel[NB:0]), .s_clamp(s_clamp[NB:0]),
    .cin_sel(1'b1), .cin_clamp(1'b0),
    .cout_sel(s_sel[NB+1]), .cout_clamp(s_clamp[NB+1]),
    .a(p_lo), .b(c_lo), .s(s[NB:0]), .cout(s[NB+1]), .sweep(sweep_lo));

  assign c = c_lo[NB-1:0];

  // The upper row's own sum only mirrors p_lo (it is pinned to it); it is not an output.
  logic unused;
  assign unused = ^{p_up, p_up_co, c_lo[NB], sweep_lo};
endmodule
