// sequencer: serial update order for the p-bits of one tile.
//
// Reciprocal networks must update one p-bit at a time. A ring of 3*N flip-flops carries a
// single 1; enable i is the OR of ring stages 3i and 3i+1, so each p-bit is enabled for two
// clock cycles, followed by one idle cycle before the next p-bit starts, and a full sweep
// (one complete update of the tile) takes 3*N cycles. The order is p-bit 0, 1, ..., N-1.
// The paper draws this for three p-bits as a 9-stage ring with one gate per pair of stages and
// gives the timing "2 clock cycles per update, 1 cycle gap"; the ring reset (stage 0 holds the
// 1) is this design's choice.
//
// Interface: en[N-1:0] one-hot or all-zero (during gaps). sweep pulses in the last cycle of a
// sweep (ring stage 3N-1), marking a complete update.
module sequencer #(
  parameter int N = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [N-1:0] en,
  output logic         sweep
);
  logic [3*N-1:0] ring;

  always_ff @(posedge clk) begin
    if (!rst_n) ring <= (3*N)'(1);
    else        ring <= {ring[3*N-2:0], ring[3*N-1]};
  end

  always_comb
    for (int i = 0; i < N; i++) en[i] = ring[3*i] | ring[3*i+1];

  assign sweep = ring[3*N-1];

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(en))
    else $error("sequencer: two p-bits enabled at once");
endmodule
