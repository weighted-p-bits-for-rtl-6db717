// system_tile: a tile of N weighted p-bits (4 x 4 = 16 by default) with its sequencer.
//
// Every p-bit i sees the states of the other N-1 p-bits of the tile, weighted by row i of J,
// plus its bias H[i], plus the tile input m_c[i] weighted by HC[i]. The sequencer enables the
// p-bits one after the other (two cycles each, one cycle gap), so one complete update of the
// tile takes 3*N clock cycles. A problem is mapped onto the tile by its J, H and HC, which are
// fixed when the design is built: the paper obtains them offline and does not make them
// writable. Any N x N reciprocal (symmetric) J with zero diagonal can be mapped; N may be
// scaled below 16 for smaller problems (an AND gate uses 3, a full adder 5).
//
// sel[i] / clamp[i] pin p-bit i to clamp[i] when sel[i] is high. They are captured in the
// tile's Select and Clamp registers and act one cycle later.
//
// Ports: sel, clamp, m_c (per p-bit inputs), m (states), en (the sequencer's enables) and
// sweep (high in the last cycle of each complete update).
module system_tile
  import pbit_pkg::*;
#(
  parameter int          N         = MAX_N,
  parameter wmat_t       J         = '0,
  parameter wvec_t       H         = '0,
  parameter wvec_t       HC        = '0,
  parameter logic [31:0] SEED_BASE = 32'h1234_5678
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] sel,
  input  logic [N-1:0] clamp,
  input  logic [N-1:0] m_c,
  output logic [N-1:0] m,
  output logic [N-1:0] en,
  output logic         sweep
);
  logic [N-1:0] sel_q, clamp_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q   <= '0;
      clamp_q <= '0;
    end else begin
      sel_q   <= sel;
      clamp_q <= clamp;
    end
  end

  sequencer #(.N(N)) u_seq (.clk(clk), .rst_n(rst_n), .en(en), .sweep(sweep));

  for (genvar i = 0; i < N; i++) begin : g_pbit
    logic    [N-2:0] m_oth;
    weight_t [N-2:0] j_oth;
    // The other p-bits in index order, skipping i itself.
    for (genvar k = 0; k < N - 1; k++) begin : g_in
      localparam int SRC = (k < i) ? k : k + 1;
      assign m_oth[k] = m[SRC];
      assign j_oth[k] = J[i][SRC];
    end

    wpbit #(.N_IN(N - 1), .SEED(pbit_seed(SEED_BASE, i))) u_pbit (
      .clk(clk), .rst_n(rst_n), .en(en[i]), .sel(sel_q[i]), .clamp(clamp_q[i]),
      .m_in(m_oth), .j(j_oth), .h(H[i]), .m_c(m_c[i]), .hc(HC[i]), .m(m[i]));
  end

  initial assert (N >= 2 && N <= MAX_N) else $error("system_tile: N out of range");
endmodule
