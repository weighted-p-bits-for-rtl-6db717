// tunable_rng: the stochastic half of a weighted p-bit, m = sgn(rand(-1,1) + tanh(I)).
//
// The clamped input I (s[3][2]) addresses the tanh lookup table, which returns
// z = (tanh(I)+1)/2 on 32 bits. A 32-bit LFSR supplies a uniform random word r. The 32-bit
// comparator makes the new state 1 when z > r, so P(m = 1) = z: 0.5 at I = 0, near 1 for large
// positive I and near 0 for large negative I (the sigmoid of the paper's Fig. 2). The paper's
// block diagram puts the LFSR on the comparator's '+' input; taken literally that would give
// P(m = 1) = 1 - z, a falling curve, so this design follows the text and the measured sigmoid.
//
// Interface: upd loads the comparator result into m on the next clock edge; m holds otherwise.
// The LFSR runs every clock (the paper does not say whether it is gated; free running is this
// design's choice). Every p-bit needs its own SEED.
module tunable_rng
  import pbit_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic upd,
  input  act_t i_in,
  output logic m
);
  logic [ZW-1:0] z, r;

  tanh_lut u_lut  (.i_in(i_in), .z(z));
  lfsr32   #(.SEED(SEED)) u_lfsr (.clk(clk), .rst_n(rst_n), .adv(1'b1), .q(r));

  always_ff @(posedge clk) begin
    if (!rst_n)   m <= 1'b0;
    else if (upd) m <= (z > r);
  end
endmodule
