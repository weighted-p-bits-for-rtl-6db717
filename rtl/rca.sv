// rca: N-bit invertible ripple-carry adder built from full-adder tiles.
//
// Bit i is a full_adder tile (five p-bits: Cin, B, A, S, Cout) with its own sequencer. The
// tiles all run at once, so a complete update of the whole adder takes the same 15 cycles as
// one full adder (the serial-parallel scheme: serial inside a tile, parallel between tiles).
// The tiles are joined in one direction only: the Cin p-bit of bit i is pinned (Select = 1)
// to the current state of the Cout p-bit of bit i-1, so carries flow from the least to the most
// significant bit and nothing flows back. That is the paper's first joining method
// (Select / Clamp); the paper builds its 32-bit adder from 14 p-bit full adders, whose
// couplings it does not give, so this adder uses the 5 p-bit full adder it does give.
//
// Every terminal can be pinned from outside: a_sel / a_clamp, b_*, s_* per bit, cin_* for the
// first carry-in (the paper pins it to 0) and cout_* for the last carry-out. Pinning A and B
// makes an adder, pinning S and one input a subtractor, pinning nothing lets the adder wander
// over states that mostly satisfy S = A + B.
module rca
  import pbit_pkg::*;
#(
  parameter int          N         = 32,
  parameter int          I0_Q      = 4,
  parameter logic [31:0] SEED_BASE = 32'hACE0_0001
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] a_sel,
  input  logic [N-1:0] a_clamp,
  input  logic [N-1:0] b_sel,
  input  logic [N-1:0] b_clamp,
  input  logic [N-1:0] s_sel,
  input  logic [N-1:0] s_clamp,
  input  logic         cin_sel,
  input  logic         cin_clamp,
  input  logic         cout_sel,
  input  logic         cout_clamp,
  output logic [N-1:0] a,
  output logic [N-1:0] b,
  output logic [N-1:0] s,
  output logic         cout,
  output logic         sweep
);
  logic [N-1:0] co;
  logic [N-1:0] sw;

  for (genvar i = 0; i < N; i++) begin : g_fa
    logic [FA_N-1:0] sel, clamp, m;
    always_comb begin
      sel   = '0;
      clamp = '0;
      sel[FA_A] = a_sel[i];  clamp[FA_A] = a_clamp[i];
      sel[FA_B] = b_sel[i];  clamp[FA_B] = b_clamp[i];
      sel[FA_S] = s_sel[i];  clamp[FA_S] = s_clamp[i];
      if (i == 0) begin
        sel[FA_CIN] = cin_sel;  clamp[FA_CIN] = cin_clamp;
      end else begin
        sel[FA_CIN] = 1'b1;     clamp[FA_CIN] = co[i > 0 ? i - 1 : 0];
      end
      if (i == N - 1) begin
        sel[FA_COUT] = cout_sel;  clamp[FA_COUT] = cout_clamp;
      end
    end

    full_adder #(.I0_Q(I0_Q), .SEED_BASE(SEED_BASE + 32'(i) * 32'h0001_0003)) u_fa (
      .clk(clk), .rst_n(rst_n), .sel(sel), .clamp(clamp), .m_c('0), .m(m), .sweep(sw[i]));

    assign a[i]  = m[FA_A];
    assign b[i]  = m[FA_B];
    assign s[i]  = m[FA_S];
    assign co[i] = m[FA_COUT];
  end

  assign cout  = co[N-1];
  assign sweep = sw[0];
endmodule
