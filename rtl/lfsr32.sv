// lfsr32: 32-bit linear feedback shift register, the pseudo-random source of a p-bit.
//
// Stages are numbered 1..32. Every enabled clock the register shifts one place towards stage 32
// and stage 1 loads the XNOR of stages 32, 22, 2 and 1. These taps give a maximal-length
// sequence of 2^32 - 1 states; the all-ones word is the lock-up state that XNOR feedback never
// reaches and that the seed must not be. The taps and the XNOR feedback follow the paper; the
// synchronous active-low reset to SEED and the advance enable are this design's choice.
//
// Interface: clk, rst_n (sync, active low), adv (shift when high), q[31:0] with q[k-1] = stage k.
// Timing: q changes on the clock edge after adv is sampled high.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adv,
  output logic [31:0] q
);
  logic fb;
  assign fb = ~(q[31] ^ q[21] ^ q[1] ^ q[0]);

  always_ff @(posedge clk) begin
    if (!rst_n)   q <= SEED;
    else if (adv) q <= {q[30:0], fb};
  end

  initial assert (SEED != '1) else $error("lfsr32: all-ones seed is the lock-up state");
endmodule
